// temporal_encoder: one lane of the parallel temporal encoder.
//
// Registers the sign and the magnitude ("value") of one decoded weight when
// load is high, then, while active is high, emits bit_out = (value > cnt),
// where cnt is the shared bitstream counter counting 0, 1, 2. A magnitude v
// thus produces v ones: the number of ones in the bitstream is the value
// (temporal coding). sign_out is the registered sign, sent to the row
// accumulators. The comparator follows the source's encoder figure; sharing
// one counter among all lanes is this design's choice.
//
// Timing: bit_out is combinational from the registers, cnt and active.
module temporal_encoder
  import fineq_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  wq_t              w_in,
  input  logic [MAG_W-1:0] cnt,
  input  logic             active,
  output logic             bit_out,
  output logic             sign_out
);

  logic [MAG_W-1:0] value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      value    <= '0;
      sign_out <= 1'b0;
    end else if (load) begin
      value    <= w_in.mag;
      sign_out <= w_in.sign;
    end
  end

  assign bit_out = active && (value > cnt);

endmodule

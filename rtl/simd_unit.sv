// simd_unit: the vector processing unit behind the PE array.
//
// Takes the ROWS partial sums the array produced for one output channel and
// one K-tile, adds them to the running sums of the earlier K-tiles (prev, read
// from the output buffer; ignored when accumulate is low, i.e. for the first
// K-tile), and on the last K-tile applies the activation function (identity or
// ReLU). The source says only that partial sums go to the vector unit and that
// it executes activation functions; the accumulation across K-tiles and the
// choice of ReLU are this design's.
//
// Timing: one clock from in_valid to out_valid.
module simd_unit
  import fineq_pkg::*;
#(
  parameter int LANES = 64,
  parameter int IN_W  = 17
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   psum [LANES],
  input  logic                     accumulate,
  input  logic signed [PSUM_W-1:0] prev [LANES],
  input  logic                     last,
  input  act_e                     act_mode,
  output logic                     out_valid,
  output logic signed [PSUM_W-1:0] out [LANES]
);

  logic signed [PSUM_W-1:0] s [LANES];

  always_comb
    for (int i = 0; i < LANES; i++) begin
      s[i] = PSUM_W'(psum[i]) + (accumulate ? prev[i] : '0);
      if (last && act_mode == ACT_RELU && s[i] < 0) s[i] = '0;
    end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) out[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= s;
    end
  end

endmodule

// tc_pe: processing element of the temporal coding PE array.
//
// Holds one activation in its input register. During preloading (shift high)
// the register takes act_in from the left neighbour and its old value leaves
// on act_out to the right neighbour, so a row fills like a shift register.
// While the weight bitstream of this PE's column is 1 the selector outputs the
// activation, otherwise 0: a multiplication by a 1-bit stream, so no
// multiplier is needed. Structure as in the source's PE figure.
//
// Timing: pe_out is combinational from the register and bit_in.
module tc_pe
  import fineq_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    shift,
  input  logic signed [ACT_W-1:0] act_in,
  input  logic                    bit_in,
  output logic signed [ACT_W-1:0] act_out,
  output logic signed [ACT_W-1:0] pe_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     act_out <= '0;
    else if (shift) act_out <= act_in;
  end

  assign pe_out = bit_in ? act_out : '0;

endmodule

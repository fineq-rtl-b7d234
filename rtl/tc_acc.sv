// tc_acc: accumulation unit at the end of one PE row.
//
// Each clock with valid high it negates every PE output whose column weight is
// negative (sign bit 1), adds the COLS terms with a balanced adder tree and
// adds the tree's sum to the accumulator; clear starts a new vector (the tree
// sum replaces the accumulator). After the last bitstream cycle acc holds
// sum_c w_c * x_c for the row, because each column contributed its activation
// once per 1 in its weight's bitstream. The sign handling and adder tree follow
// the source; the negation form and ACC_W are this design's choices.
//
// Timing: acc is registered, updated on clocks with valid high.
module tc_acc
  import fineq_pkg::*;
#(
  parameter int COLS  = 64,
  parameter int ACC_W = ACT_W + MAG_W + $clog2(COLS) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    valid,
  input  logic signed [ACT_W-1:0] pe_out [COLS],
  input  logic [COLS-1:0]         signs,
  output logic signed [ACC_W-1:0] acc
);

  localparam int LV = $clog2(COLS);
  initial assert (COLS == (1 << LV)) else $fatal(1, "COLS must be a power of two");

  logic signed [ACC_W-1:0] tree [LV+1][COLS];
  logic signed [ACC_W-1:0] sum;

  always_comb begin
    for (int c = 0; c < COLS; c++)
      tree[0][c] = signs[c] ? -ACC_W'(pe_out[c]) : ACC_W'(pe_out[c]);
    for (int l = 1; l <= LV; l++)
      for (int c = 0; c < COLS; c++)
        tree[l][c] = (c < (COLS >> l)) ? tree[l-1][2*c] + tree[l-1][2*c+1] : '0;
    sum = tree[LV][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (valid) acc <= clear ? sum : acc + sum;
  end

endmodule

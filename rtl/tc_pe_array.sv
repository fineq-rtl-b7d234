// tc_pe_array: the temporal coding PE array (ROWS x COLS PEs).
//
// Input-stationary: PE(r,c) keeps the activation X[k0+c][r] of the current
// K-tile. Preloading shifts one column of ROWS activations in at the left per
// clock (preload high); after COLS shifts the column entered first sits at
// c = COLS-1. A weight vector w[0..COLS-1] of one output channel is then
// loaded into the parallel temporal encoder and its bitstreams are broadcast,
// one wire per column, to all rows. Each row's accumulator sums the signed PE
// outputs over the 1..3 bitstream cycles, so row r ends with
// psum[r] = sum_c w[c] * X[k0+c][r]. The arrangement follows the source's
// array figure and its worked example.
//
// Timing: enc_load at clock n, bitstream cycles n+1..n+L (L set by enc_stop,
// at most 3), psum valid with psum_valid at clock n+L+1.
//
// Lint reports rst_n as both an asynchronous reset and a synchronous
// signal because assertions in the submodules sample it through 'disable iff';
// the logic itself resets asynchronously.
module tc_pe_array
  import fineq_pkg::*;
#(
  parameter int ROWS  = 64,
  parameter int COLS  = 64,
  localparam int ACC_W = ACT_W + MAG_W + $clog2(COLS) + 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    preload,
  input  logic signed [ACT_W-1:0] preload_data [ROWS],
  input  logic                    enc_load,
  input  wq_t                     enc_w [COLS],
  input  logic                    enc_stop,
  output logic                    enc_active,
  output logic                    enc_last,
  output logic signed [ACC_W-1:0] psum [ROWS],
  output logic                    psum_valid
);

  logic [COLS-1:0] bits, signs;
  logic            first;

  parallel_temporal_encoder #(.COLS(COLS)) u_enc (
    .clk, .rst_n, .load(enc_load), .w(enc_w), .stop(enc_stop),
    .bits, .signs, .active(enc_active), .last(enc_last)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first      <= 1'b0;
      psum_valid <= 1'b0;
    end else begin
      if (enc_load)        first <= 1'b1;
      else if (enc_active) first <= 1'b0;
      psum_valid <= enc_last;
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    logic signed [ACT_W-1:0] act [COLS+1];
    logic signed [ACT_W-1:0] pe_out [COLS];
    assign act[0] = preload_data[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      tc_pe u_pe (
        .clk, .rst_n, .shift(preload), .act_in(act[c]), .bit_in(bits[c]),
        .act_out(act[c+1]), .pe_out(pe_out[c])
      );
    end
    tc_acc #(.COLS(COLS), .ACC_W(ACC_W)) u_acc (
      .clk, .rst_n, .clear(first), .valid(enc_active),
      .pe_out, .signs, .acc(psum[r])
    );
  end

endmodule

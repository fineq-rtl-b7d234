// weight_buffer: holds decoded 3-bit weights for the temporal encoder.
//
// Written one decoder-unit row at a time (N_DEC*3 = 192 weights) and read one
// PE-array vector at a time (COLS = 64 weights). Row r holds vectors 3r..3r+2,
// so read address v returns third (v mod 3) of row v/3. With the offline
// format used here every channel is padded to a multiple of 192 weights, so the
// three vectors of a row are three consecutive K-tiles of one channel. Reads
// are synchronous (one clock). Depth and port structure are this design's
// choices; the source names the buffer only.
module weight_buffer
  import fineq_pkg::*;
#(
  parameter int DEPTH = 128,
  parameter int N_DEC = 64,
  parameter int COLS  = 64,
  localparam int ROW_W = N_DEC * CLUSTER,
  localparam int RATIO = ROW_W / COLS,
  localparam int WAW   = $clog2(DEPTH),
  localparam int RAW   = $clog2(DEPTH * RATIO)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [WAW-1:0] waddr,
  input  wq_t            wdata [ROW_W],
  input  logic [RAW-1:0] raddr,
  output wq_t            rdata [COLS]
);

  initial assert (ROW_W % COLS == 0) else $fatal(1, "row must hold whole vectors");

  logic [ROW_W*WQ_W-1:0] mem [DEPTH];
  logic [ROW_W*WQ_W-1:0] wrow;
  logic [ROW_W*WQ_W-1:0] rrow;
  logic [$clog2(RATIO+1)-1:0] rsel;

  always_comb
    for (int i = 0; i < ROW_W; i++) wrow[i*WQ_W +: WQ_W] = wdata[i];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wrow;
    rrow <= mem[WAW'(raddr / RAW'(RATIO))];
    rsel <= ($clog2(RATIO+1))'(raddr % RAW'(RATIO));
  end

  always_comb
    for (int i = 0; i < COLS; i++) rdata[i] = rrow[(32'(rsel)*COLS + i)*WQ_W +: WQ_W];

endmodule

// output_buffer: results waiting for write-back.
//
// DEPTH rows of LANES 32-bit results, one row per output channel. The vector
// unit writes a row and reads it back (port rdata, for K-tile accumulation);
// the DMA reads 64-bit words (port wd_rdata), word i of row m holding lanes
// 2i (low half) and 2i+1 (high half). Both reads are synchronous. Size and
// ports are this design's choices; the source names the buffer only.
module output_buffer
  import fineq_pkg::*;
#(
  parameter int DEPTH = 64,
  parameter int LANES = 64,
  parameter int DW    = 64,
  localparam int AW   = $clog2(DEPTH),
  localparam int WPR  = LANES * PSUM_W / DW,    // words per row
  localparam int WAW  = $clog2(DEPTH * WPR)
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic signed [PSUM_W-1:0] wdata [LANES],
  input  logic [AW-1:0]            raddr,
  output logic signed [PSUM_W-1:0] rdata [LANES],
  input  logic [WAW-1:0]           wd_raddr,
  output logic [DW-1:0]            wd_rdata
);

  logic [DW-1:0] mem [DEPTH][WPR];
  logic [DW-1:0] wrow [WPR];
  logic [DW-1:0] rrow [WPR];

  always_comb
    for (int i = 0; i < LANES; i++)
      wrow[i / (DW/PSUM_W)][(i % (DW/PSUM_W))*PSUM_W +: PSUM_W] = wdata[i];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wrow;
    rrow     <= mem[raddr];
    wd_rdata <= mem[AW'(wd_raddr / WAW'(WPR))][$clog2(WPR)'(wd_raddr % WAW'(WPR))];
  end

  always_comb
    for (int i = 0; i < LANES; i++)
      rdata[i] = rrow[i / (DW/PSUM_W)][(i % (DW/PSUM_W))*PSUM_W +: PSUM_W];

endmodule

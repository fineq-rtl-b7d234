// input_buffer: one K-tile of activations waiting to be preloaded into the
// PE array.
//
// ENTRIES entries of ROWS activations; entry e holds X[k0+e][0..ROWS-1], the
// activations that PE column e of every row will keep. It is filled one 64-bit
// scratch-pad word (8 activations) per clock and read one whole entry per
// clock while the array shifts the column in. Reads are synchronous. Sizes
// and ports are this design's choices; the source names the buffer only.
module input_buffer
  import fineq_pkg::*;
#(
  parameter int ROWS    = 64,
  parameter int ENTRIES = 64,
  parameter int DW      = 64,
  localparam int WPE    = ROWS * ACT_W / DW,   // words per entry
  localparam int EAW    = $clog2(ENTRIES),
  localparam int WW     = (WPE > 1) ? $clog2(WPE) : 1
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [EAW-1:0]          waddr_e,
  input  logic [WW-1:0]           waddr_w,
  input  logic [DW-1:0]           wdata,
  input  logic [EAW-1:0]          raddr,
  output logic signed [ACT_W-1:0] rdata [ROWS]
);

  initial assert (ROWS * ACT_W % DW == 0) else $fatal(1, "entry must be whole words");

  logic [DW-1:0] mem [ENTRIES][WPE];
  logic [DW-1:0] rword [WPE];

  always_ff @(posedge clk) begin
    if (we) mem[waddr_e][waddr_w] <= wdata;
    rword <= mem[raddr];
  end

  always_comb
    for (int r = 0; r < ROWS; r++)
      rdata[r] = rword[r / (DW/ACT_W)][(r % (DW/ACT_W))*ACT_W +: ACT_W];

endmodule

// scratch_pad: on-chip SRAM between the DMA and the decoder / input buffer.
//
// DEPTH words of DW bits, one write port (used by the DMA while it loads
// weights and inputs from off-chip memory) and one read port (used by the
// control unit to feed the decoder unit and the input buffer). Reads are
// synchronous: rdata shows mem[raddr] one clock after raddr. The source names
// the block but gives no size or port count; 8192 x 64 bits (64 KiB) and the
// two ports are this design's choices.
module scratch_pad #(
  parameter int DEPTH = 8192,
  parameter int DW    = 64,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

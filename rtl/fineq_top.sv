// fineq_top: the FineQ accelerator for low-bit, fine-grained mixed-precision
// weights.
//
// Computes O = act(W x X) for one linear layer. W (M x K) arrives from
// off-chip memory in the FineQ packed format: clusters of three weights, each
// cluster either three 2-bit values or two 3-bit values and an implied zero,
// with one index byte describing eight clusters (2.33 bits per weight). X
// (K x ROWS) is 8-bit. The DMA loads both into the scratch pad, the decoder
// unit (N_DEC = 64 cluster decoders) expands the weights to 3-bit
// sign-magnitude values in the weight buffer, and the temporal coding PE array
// (ROWS x COLS = 64 x 64 PEs) holds one K-tile of X while the weight vector of
// each output channel is streamed through it as 1..3-cycle bitstreams. The
// vector unit adds up the K-tiles and applies the activation; the output
// buffer is written back by the DMA. The control unit runs all of it.
//
// Off-chip layouts (this design's choice), byte addresses:
//   weights: decoder row (m*KT/3 + j) at cfg_w_addr + 56*(m*KT/3 + j); each row
//            is 8 groups of {index byte, 6 data bytes} covering weights
//            192j .. 192j+191 of channel m (channels padded to 192*KT/3).
//   inputs:  X[k][0..ROWS-1] at cfg_x_addr + ROWS*k.
//   outputs: O[m][r] (32-bit) at cfg_o_addr + 4*(ROWS*m + r).
// K = 64*KT with KT a multiple of 3; M <= OBUF_DEPTH.
//
// Interface: start pulses while idle with the cfg_* values; done pulses when
// the last output word has been acknowledged on AXI. The AXI port is an
// AXI4-Lite style master (single beats, 64-bit data) to off-chip memory.
//
// Lint reports rst_n as both an asynchronous reset and a synchronous
// signal because assertions in the submodules sample it through 'disable iff';
// the logic itself resets asynchronously.
module fineq_top
  import fineq_pkg::*;
#(
  parameter int ROWS       = 64,
  parameter int COLS       = 64,
  parameter int N_DEC      = 64,
  parameter int SPAD_DEPTH = 8192,
  parameter int WBUF_DEPTH = 128,
  parameter int OBUF_DEPTH = 64,
  localparam int AW        = 32,
  localparam int DW        = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [AW-1:0]  cfg_w_addr,
  input  logic [AW-1:0]  cfg_x_addr,
  input  logic [AW-1:0]  cfg_o_addr,
  input  logic [15:0]    cfg_m,
  input  logic [7:0]     cfg_kt,
  input  act_e           cfg_act,
  output logic           busy,
  output logic           done,
  output logic           dma_err,
  output logic [31:0]    n_early_stop,
  output logic [31:0]    n_full_stream,
  output logic [AW-1:0]  m_axi_araddr,
  output logic           m_axi_arvalid,
  input  logic           m_axi_arready,
  input  logic [DW-1:0]  m_axi_rdata,
  input  logic [1:0]     m_axi_rresp,
  input  logic           m_axi_rvalid,
  output logic           m_axi_rready,
  output logic [AW-1:0]  m_axi_awaddr,
  output logic           m_axi_awvalid,
  input  logic           m_axi_awready,
  output logic [DW-1:0]  m_axi_wdata,
  output logic [DW/8-1:0] m_axi_wstrb,
  output logic           m_axi_wvalid,
  input  logic           m_axi_wready,
  input  logic [1:0]     m_axi_bresp,
  input  logic           m_axi_bvalid,
  output logic           m_axi_bready
);

  localparam int RATIO = N_DEC * CLUSTER / COLS;
  localparam int WPG   = (N_DEC / GRP_CL * GRP_W + DW - 1) / DW;
  localparam int SAW   = $clog2(SPAD_DEPTH);
  localparam int WBAW  = $clog2(WBUF_DEPTH);
  localparam int WBRAW = $clog2(WBUF_DEPTH * RATIO);
  localparam int OAW   = $clog2(OBUF_DEPTH);
  localparam int OWAW  = $clog2(OBUF_DEPTH * ROWS * PSUM_W / DW);
  localparam int IWPE  = ROWS * ACT_W / DW;
  localparam int IWW   = (IWPE > 1) ? $clog2(IWPE) : 1;
  localparam int CAW   = $clog2(COLS);
  localparam int ACC_W = ACT_W + MAG_W + $clog2(COLS) + 1;
  localparam int LAW   = (SAW > OWAW) ? SAW : OWAW;

  // DMA <-> control
  logic            dma_cmd_valid, dma_cmd_write, dma_busy, dma_done;
  logic [AW-1:0]   dma_cmd_addr;
  logic [SAW-1:0]  dma_cmd_local;
  logic [15:0]     dma_cmd_len;
  logic            spad_we;
  logic [LAW-1:0]  spad_waddr, dma_obuf_raddr;
  logic [DW-1:0]   spad_wdata, spad_rdata, obuf_wd_rdata;
  logic [SAW-1:0]  spad_raddr;
  // decode path
  logic                 dec_in_valid, dec_out_valid;
  logic [WPG*DW-1:0]    dec_in_word;
  wq_t                  dec_w [N_DEC*CLUSTER];
  logic                 wbuf_we;
  logic [WBAW-1:0]      wbuf_waddr;
  logic [WBRAW-1:0]     wbuf_raddr;
  wq_t                  wbuf_rdata [COLS];
  // input path
  logic                    ibuf_we;
  logic [CAW-1:0]          ibuf_waddr_e, ibuf_raddr;
  logic [IWW-1:0]          ibuf_waddr_w;
  logic [DW-1:0]           ibuf_wdata;
  logic signed [ACT_W-1:0] ibuf_rdata [ROWS];
  // array and vector unit
  logic                     arr_preload, enc_load, enc_stop, enc_active, enc_last, psum_valid;
  logic signed [ACC_W-1:0]  psum [ROWS];
  logic                     simd_accumulate, simd_last, simd_out_valid;
  act_e                     simd_act;
  logic signed [PSUM_W-1:0] simd_out [ROWS];
  logic signed [PSUM_W-1:0] obuf_rdata [ROWS];
  logic                     obuf_we;
  logic [OAW-1:0]           obuf_waddr, obuf_raddr;

  control_unit #(
    .ROWS(ROWS), .COLS(COLS), .N_DEC(N_DEC), .SPAD_DEPTH(SPAD_DEPTH),
    .WBUF_DEPTH(WBUF_DEPTH), .OBUF_DEPTH(OBUF_DEPTH), .AW(AW), .DW(DW)
  ) u_ctl (
    .clk, .rst_n, .start, .cfg_w_addr, .cfg_x_addr, .cfg_o_addr, .cfg_m, .cfg_kt, .cfg_act,
    .busy, .done,
    .dma_cmd_valid, .dma_cmd_write, .dma_cmd_addr, .dma_cmd_local, .dma_cmd_len, .dma_done,
    .spad_raddr, .spad_rdata,
    .dec_in_valid, .dec_in_word, .dec_out_valid,
    .wbuf_we, .wbuf_waddr, .wbuf_raddr, .wbuf_rdata,
    .ibuf_we, .ibuf_waddr_e, .ibuf_waddr_w, .ibuf_wdata, .ibuf_raddr,
    .arr_preload, .enc_load, .enc_stop, .enc_last, .psum_valid,
    .simd_accumulate, .simd_last, .simd_act, .simd_out_valid,
    .obuf_we, .obuf_waddr, .obuf_raddr,
    .n_early_stop, .n_full_stream
  );

  dma #(.AW(AW), .DW(DW), .LAW(LAW), .LEN_W(16)) u_dma (
    .clk, .rst_n,
    .cmd_valid(dma_cmd_valid), .cmd_write(dma_cmd_write), .cmd_addr(dma_cmd_addr),
    .cmd_local(LAW'(dma_cmd_local)), .cmd_len(dma_cmd_len),
    .busy(dma_busy), .done(dma_done), .err(dma_err),
    .spad_we, .spad_waddr, .spad_wdata,
    .obuf_raddr(dma_obuf_raddr), .obuf_rdata(obuf_wd_rdata),
    .m_axi_araddr, .m_axi_arvalid, .m_axi_arready, .m_axi_rdata, .m_axi_rresp,
    .m_axi_rvalid, .m_axi_rready, .m_axi_awaddr, .m_axi_awvalid, .m_axi_awready,
    .m_axi_wdata, .m_axi_wstrb, .m_axi_wvalid, .m_axi_wready, .m_axi_bresp,
    .m_axi_bvalid, .m_axi_bready
  );

  scratch_pad #(.DEPTH(SPAD_DEPTH), .DW(DW)) u_spad (
    .clk, .we(spad_we), .waddr(SAW'(spad_waddr)), .wdata(spad_wdata),
    .raddr(spad_raddr), .rdata(spad_rdata)
  );

  decoder_unit #(.N_DEC(N_DEC)) u_dec (
    .clk, .rst_n, .in_valid(dec_in_valid),
    .in_word(dec_in_word[N_DEC/GRP_CL*GRP_W-1:0]),
    .out_valid(dec_out_valid), .w(dec_w)
  );

  weight_buffer #(.DEPTH(WBUF_DEPTH), .N_DEC(N_DEC), .COLS(COLS)) u_wbuf (
    .clk, .we(wbuf_we), .waddr(wbuf_waddr), .wdata(dec_w),
    .raddr(wbuf_raddr), .rdata(wbuf_rdata)
  );

  input_buffer #(.ROWS(ROWS), .ENTRIES(COLS), .DW(DW)) u_ibuf (
    .clk, .we(ibuf_we), .waddr_e(ibuf_waddr_e), .waddr_w(ibuf_waddr_w),
    .wdata(ibuf_wdata), .raddr(ibuf_raddr), .rdata(ibuf_rdata)
  );

  tc_pe_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .preload(arr_preload), .preload_data(ibuf_rdata),
    .enc_load, .enc_w(wbuf_rdata), .enc_stop, .enc_active, .enc_last,
    .psum, .psum_valid
  );

  simd_unit #(.LANES(ROWS), .IN_W(ACC_W)) u_simd (
    .clk, .rst_n, .in_valid(psum_valid), .psum, .accumulate(simd_accumulate),
    .prev(obuf_rdata), .last(simd_last), .act_mode(simd_act),
    .out_valid(simd_out_valid), .out(simd_out)
  );

  output_buffer #(.DEPTH(OBUF_DEPTH), .LANES(ROWS), .DW(DW)) u_obuf (
    .clk, .we(obuf_we), .waddr(obuf_waddr), .wdata(simd_out),
    .raddr(obuf_raddr), .rdata(obuf_rdata),
    .wd_raddr(OWAW'(dma_obuf_raddr)), .wd_rdata(obuf_wd_rdata)
  );

endmodule

// control_unit: sequences one layer O = act(W x X) through the accelerator.
//
// W is M x K (output channels x inputs), X is K x ROWS, K = KT * COLS with KT
// a multiple of RATIO = 3*N_DEC/COLS (3 at the default sizes), because each
// channel is stored padded to whole decoder rows. The stages:
//   1. DMA: packed weights -> scratch pad words 0.. (M*KT/RATIO rows of WPG
//      words), inputs -> scratch pad from word SPAD_DEPTH/2 (K*ROWS/8 words).
//   2. Decode: WPG scratch-pad words per row go through the decoder unit into
//      one weight-buffer row; one row every WPG clocks, pipelined. Decoding
//      starts as soon as the weights are in and runs while the input DMA
//      fills the other half of the scratch pad; the K-tiles start once both
//      have finished.
//   3. For each K-tile kt: fill the input buffer (COLS*ROWS/8 words), then
//      preload the PE array, entry COLS-1 first, one column per clock.
//   4. For each channel m: read vector m*KT+kt, load the temporal encoder and
//      raise its stop input once the counter has reached the vector's largest
//      magnitude (never less than one cycle), so a vector of 2-bit clusters
//      streams for one cycle instead of three. The partial sums go through the
//      vector unit (added to row m of the output buffer unless kt = 0,
//      activation on the last K-tile) into output-buffer row m.
//   5. DMA: M*ROWS/2 output words -> off-chip memory.
// The stage list follows the source's six-stage pipeline. How far the stages
// overlap is this design's choice (only decode and the input DMA do), as are
// the memory layout and the early-stop rule. Per vector the array stage
// takes L+4 clocks, L = 1..3.
//
// Interface: start (one clock, while idle) takes the cfg_* inputs; busy is
// high until done pulses. Counters count early stops and full streams.
//
// Input-buffer write data is the scratch-pad read data and simd_act is the
// latched configuration: both are plain wires through this module.
// The assertions sample rst_n through 'disable iff', so lint reports rst_n
// as both an asynchronous reset and a synchronous signal. Only the
// assertions use it synchronously; the logic itself resets asynchronously.
module control_unit
  import fineq_pkg::*;
#(
  parameter int ROWS       = 64,
  parameter int COLS       = 64,
  parameter int N_DEC      = 64,
  parameter int SPAD_DEPTH = 8192,
  parameter int WBUF_DEPTH = 128,
  parameter int OBUF_DEPTH = 64,
  parameter int AW         = 32,
  parameter int DW         = 64,
  localparam int RATIO     = N_DEC * CLUSTER / COLS,
  localparam int WPG       = (N_DEC / GRP_CL * GRP_W + DW - 1) / DW,
  localparam int SAW       = $clog2(SPAD_DEPTH),
  localparam int WBAW      = $clog2(WBUF_DEPTH),
  localparam int WBRAW     = $clog2(WBUF_DEPTH * RATIO),
  localparam int OAW       = $clog2(OBUF_DEPTH),
  localparam int IWPE      = ROWS * ACT_W / DW,
  localparam int IWW       = (IWPE > 1) ? $clog2(IWPE) : 1,
  localparam int CAW       = $clog2(COLS),
  localparam int LEN_W     = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AW-1:0]        cfg_w_addr,
  input  logic [AW-1:0]        cfg_x_addr,
  input  logic [AW-1:0]        cfg_o_addr,
  input  logic [15:0]          cfg_m,       // output channels, 1..OBUF_DEPTH
  input  logic [7:0]           cfg_kt,      // K-tiles, multiple of RATIO
  input  act_e                 cfg_act,
  output logic                 busy,
  output logic                 done,
  // DMA
  output logic                 dma_cmd_valid,
  output logic                 dma_cmd_write,
  output logic [AW-1:0]        dma_cmd_addr,
  output logic [SAW-1:0]       dma_cmd_local,
  output logic [LEN_W-1:0]     dma_cmd_len,
  input  logic                 dma_done,
  // scratch pad read port
  output logic [SAW-1:0]       spad_raddr,
  input  logic [DW-1:0]        spad_rdata,
  // decoder unit
  output logic                 dec_in_valid,
  output logic [WPG*DW-1:0]    dec_in_word,
  input  logic                 dec_out_valid,
  // weight buffer
  output logic                 wbuf_we,
  output logic [WBAW-1:0]      wbuf_waddr,
  output logic [WBRAW-1:0]     wbuf_raddr,
  input  wq_t                  wbuf_rdata [COLS],
  // input buffer
  output logic                 ibuf_we,
  output logic [CAW-1:0]       ibuf_waddr_e,
  output logic [IWW-1:0]       ibuf_waddr_w,
  output logic [DW-1:0]        ibuf_wdata,
  output logic [CAW-1:0]       ibuf_raddr,
  // PE array
  output logic                 arr_preload,
  output logic                 enc_load,
  output logic                 enc_stop,
  input  logic                 enc_last,
  input  logic                 psum_valid,
  // vector unit and output buffer
  output logic                 simd_accumulate,
  output logic                 simd_last,
  output act_e                 simd_act,
  input  logic                 simd_out_valid,
  output logic                 obuf_we,
  output logic [OAW-1:0]       obuf_waddr,
  output logic [OAW-1:0]       obuf_raddr,
  // event counters
  output logic [31:0]          n_early_stop,
  output logic [31:0]          n_full_stream
);

  localparam logic [SAW-1:0] X_BASE = SAW'(SPAD_DEPTH / 2);

  typedef enum logic [4:0] {
    S_IDLE, S_LDW, S_LDW_WAIT, S_LDX, S_LDX_WAIT, S_DEC, S_DEC_DRAIN,
    S_IBUF, S_IBUF_END, S_PRE, S_WRD, S_WLD, S_STREAM, S_PSUM, S_OWR, S_WB, S_WB_WAIT
  } ctl_state_e;

  ctl_state_e st;

  // latched configuration
  logic [AW-1:0] w_addr, x_addr, o_addr;
  logic [15:0]   m_cnt;
  logic [7:0]    kt_cnt;
  act_e          act;

  // loop counters
  logic [15:0]  g;        // decode row / channel
  logic [15:0]  n_rows;   // decode rows
  logic [15:0]  i;        // word / entry counter
  logic [7:0]   kt;
  logic [1:0]   t, len;

  // read pipeline tags (one-clock scratch-pad / input-buffer latency)
  logic         rd_v, rd_last;
  logic [15:0]  rd_i;
  logic [15:0]  rd_g;
  logic [DW-1:0] asm_w [WPG];
  logic [15:0]  dec_row_q;
  logic         pre_v;
  logic         x_loaded;   // input DMA finished (it runs during decode)

  assign busy = (st != S_IDLE);

  // largest magnitude of the vector being loaded
  logic [MAG_W-1:0] vmax;
  always_comb begin
    vmax = '0;
    for (int c = 0; c < COLS; c++)
      if (wbuf_rdata[c].mag > vmax) vmax = wbuf_rdata[c].mag;
  end

  // decoder input: collected words, the last one straight from the scratch pad
  always_comb
    for (int j = 0; j < WPG; j++)
      dec_in_word[j*DW +: DW] = (rd_i == 16'(j)) ? spad_rdata : asm_w[j];
  assign dec_in_valid = rd_v && rd_last && (st == S_DEC || st == S_DEC_DRAIN);

  assign wbuf_we    = dec_out_valid;
  assign wbuf_waddr = WBAW'(dec_row_q);

  assign ibuf_we      = rd_v && (st == S_IBUF || st == S_IBUF_END);
  assign ibuf_waddr_e = CAW'(rd_i / 16'(IWPE));
  assign ibuf_waddr_w = IWW'(rd_i % 16'(IWPE));
  assign ibuf_wdata   = spad_rdata;

  assign arr_preload  = pre_v;

  assign enc_load   = (st == S_WLD);
  assign enc_stop   = (st == S_STREAM) && (t == len);
  assign wbuf_raddr = WBRAW'(32'(g) * 32'(kt_cnt) + 32'(kt));
  assign obuf_raddr = OAW'(g);
  assign obuf_waddr = OAW'(g);
  assign obuf_we    = simd_out_valid;
  assign simd_accumulate = (kt != 8'd0);
  assign simd_last       = (kt == kt_cnt - 8'd1);
  assign simd_act        = act;

  always_comb begin
    dma_cmd_valid = 1'b0;
    dma_cmd_write = 1'b0;
    dma_cmd_addr  = w_addr;
    dma_cmd_local = '0;
    dma_cmd_len   = LEN_W'(32'(n_rows) * WPG);
    unique case (st)
      S_LDW: dma_cmd_valid = 1'b1;
      S_LDX: begin
        dma_cmd_valid = 1'b1;
        dma_cmd_addr  = x_addr;
        dma_cmd_local = X_BASE;
        dma_cmd_len   = LEN_W'(32'(kt_cnt) * COLS * IWPE);
      end
      S_WB: begin
        dma_cmd_valid = 1'b1;
        dma_cmd_write = 1'b1;
        dma_cmd_addr  = o_addr;
        dma_cmd_len   = LEN_W'(32'(m_cnt) * (ROWS * PSUM_W / DW));
      end
      default: ;
    endcase
  end

  always_comb begin
    spad_raddr = '0;
    if (st == S_DEC)  spad_raddr = SAW'(32'(g) * WPG + 32'(i));
    if (st == S_IBUF) spad_raddr = X_BASE + SAW'((32'(kt) * COLS * IWPE) + 32'(i));
  end
  assign ibuf_raddr = CAW'(COLS - 1) - CAW'(i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE;
      w_addr <= '0; x_addr <= '0; o_addr <= '0;
      m_cnt <= '0; kt_cnt <= '0; act <= ACT_NONE;
      g <= '0; n_rows <= '0; i <= '0; kt <= '0; t <= '0; len <= '0;
      rd_v <= 1'b0; rd_last <= 1'b0; rd_i <= '0; rd_g <= '0;
      dec_row_q <= '0; pre_v <= 1'b0; done <= 1'b0; x_loaded <= 1'b0;
      for (int j = 0; j < WPG; j++) asm_w[j] <= '0;
      n_early_stop <= '0; n_full_stream <= '0;
    end else begin
      done    <= 1'b0;
      rd_v    <= 1'b0;
      rd_last <= 1'b0;
      pre_v   <= 1'b0;
      for (int j = 0; j < WPG; j++)
        if (rd_v && rd_i == 16'(j)) asm_w[j] <= spad_rdata;
      if (dec_in_valid) dec_row_q <= rd_g;
      if (st == S_LDX) x_loaded <= 1'b0;
      else if (dma_done && (st == S_DEC || st == S_DEC_DRAIN || st == S_LDX_WAIT))
        x_loaded <= 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          w_addr <= cfg_w_addr; x_addr <= cfg_x_addr; o_addr <= cfg_o_addr;
          m_cnt  <= cfg_m;      kt_cnt <= cfg_kt;     act    <= cfg_act;
          n_rows <= 16'(32'(cfg_m) * 32'(cfg_kt) / RATIO);
          st     <= S_LDW;
        end
        S_LDW:      st <= S_LDW_WAIT;
        S_LDW_WAIT: if (dma_done) st <= S_LDX;
        S_LDX:      begin st <= S_DEC; g <= '0; i <= '0; end   // decode overlaps the input DMA
        S_LDX_WAIT: if (x_loaded) begin st <= S_IBUF; kt <= '0; i <= '0; end
        S_DEC: begin
          rd_v    <= 1'b1;
          rd_i    <= i;
          rd_g    <= g;
          rd_last <= (i == 16'(WPG - 1));
          if (i == 16'(WPG - 1)) begin
            i <= '0;
            g <= g + 1'b1;
            if (g == n_rows - 1'b1) st <= S_DEC_DRAIN;
          end else i <= i + 1'b1;
        end
        S_DEC_DRAIN: if (dec_out_valid && dec_row_q == n_rows - 1'b1) st <= S_LDX_WAIT;
        S_IBUF: begin
          rd_v <= 1'b1;
          rd_i <= i;
          if (i == 16'(COLS * IWPE - 1)) begin i <= '0; st <= S_IBUF_END; end
          else i <= i + 1'b1;
        end
        S_IBUF_END: st <= S_PRE;   // last input-buffer word is written
        S_PRE: begin
          pre_v <= 1'b1;
          if (i == 16'(COLS - 1)) begin i <= '0; g <= '0; st <= S_WRD; end
          else i <= i + 1'b1;
        end
        S_WRD: if (!pre_v) st <= S_WLD;   // last preload column has shifted in
        S_WLD: begin
          len <= (vmax == '0) ? 2'd0 : vmax - 1'b1;   // index of the last cycle
          t   <= '0;
          st  <= S_STREAM;
        end
        S_STREAM: begin
          t <= t + 1'b1;
          if (enc_last) begin
            st <= S_PSUM;
            if (t == 2'(TC_LEN - 1)) n_full_stream <= n_full_stream + 1'b1;
            else                     n_early_stop  <= n_early_stop + 1'b1;
          end
        end
        S_PSUM: st <= S_OWR;                 // vector unit takes the partial sums
        S_OWR: begin                         // result row written this clock
          if (g == m_cnt - 1'b1) begin
            g <= '0;
            if (kt == kt_cnt - 8'd1) st <= S_WB;
            else begin kt <= kt + 1'b1; i <= '0; st <= S_IBUF; end
          end else begin
            g  <= g + 1'b1;
            st <= S_WRD;
          end
        end
        S_WB:      st <= S_WB_WAIT;
        S_WB_WAIT: if (dma_done) begin st <= S_IDLE; done <= 1'b1; end
        default:   st <= S_IDLE;
      endcase
    end
  end

  // the vector unit sees partial sums exactly in S_PSUM and answers in S_OWR
  assert property (@(posedge clk) disable iff (!rst_n) psum_valid |-> st == S_PSUM);
  assert property (@(posedge clk) disable iff (!rst_n) simd_out_valid |-> st == S_OWR);

endmodule

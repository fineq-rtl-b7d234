// tb_control_unit: the sequencer with simple stand-ins for the blocks it
// drives (DMA answering after random delays, scratch pad and weight buffer as
// registered-read arrays, decoder and vector unit as one-clock delays, an
// encoder model that ends a stream on stop or after three cycles).
//
// Checks, for M = 5 channels and KT = 6 K-tiles at an 8 x 8 array: the three
// DMA commands (addresses, local addresses, lengths, direction, order), that
// every decoder row is fed its scratch-pad word and written to its weight-
// buffer row, the input-buffer fill addresses and data, the reverse preload
// order, that vector m*KT+kt is loaded for channel m and tile kt, that stop
// comes on the cycle given by the vector's largest magnitude, the
// accumulate/last flags, the output-buffer row, and the final done. The
// layer runs twice: first the input DMA ends while the weights are still
// being decoded, then it ends after them. Both runs must decode during the
// input DMA and fill the input buffer only after it.
module tb_control_unit;
  import fineq_pkg::*;
  localparam int ROWS = 8, COLS = 8, N_DEC = 8, SD = 1024, WD = 32, OD = 16;
  localparam int M = 5, KT = 6, NR = M * KT / 3;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic busy, done;
  logic dma_cmd_valid, dma_cmd_write, dma_done = 0;
  logic [31:0] dma_cmd_addr;
  logic [9:0]  dma_cmd_local, spad_raddr;
  logic [15:0] dma_cmd_len;
  logic [63:0] spad_rdata, dec_in_word, ibuf_wdata;
  logic dec_in_valid, dec_out_valid = 0;
  logic wbuf_we;
  logic [4:0] wbuf_waddr;
  logic [6:0] wbuf_raddr;
  wq_t wbuf_rdata [COLS];
  logic ibuf_we;
  logic [2:0] ibuf_waddr_e, ibuf_raddr;
  logic [0:0] ibuf_waddr_w;
  logic arr_preload, enc_load, enc_stop, enc_last, psum_valid = 0;
  logic simd_accumulate, simd_last, simd_out_valid = 0;
  act_e simd_act;
  logic obuf_we;
  logic [3:0] obuf_waddr, obuf_raddr;
  logic [31:0] n_early_stop, n_full_stream;

  control_unit #(.ROWS(ROWS), .COLS(COLS), .N_DEC(N_DEC), .SPAD_DEPTH(SD),
                 .WBUF_DEPTH(WD), .OBUF_DEPTH(OD)) dut (
    .clk, .rst_n, .start, .cfg_w_addr(32'h1000), .cfg_x_addr(32'h8000), .cfg_o_addr(32'hC000),
    .cfg_m(16'(M)), .cfg_kt(8'(KT)), .cfg_act(ACT_RELU), .busy, .done,
    .dma_cmd_valid, .dma_cmd_write, .dma_cmd_addr, .dma_cmd_local, .dma_cmd_len, .dma_done,
    .spad_raddr, .spad_rdata, .dec_in_valid, .dec_in_word, .dec_out_valid,
    .wbuf_we, .wbuf_waddr, .wbuf_raddr, .wbuf_rdata,
    .ibuf_we, .ibuf_waddr_e, .ibuf_waddr_w, .ibuf_wdata, .ibuf_raddr,
    .arr_preload, .enc_load, .enc_stop, .enc_last, .psum_valid,
    .simd_accumulate, .simd_last, .simd_act, .simd_out_valid,
    .obuf_we, .obuf_waddr, .obuf_raddr, .n_early_stop, .n_full_stream);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- stand-ins ----
  logic [63:0] spad [SD];
  logic [2:0]  vec [WD*3][COLS];
  always_ff @(posedge clk) begin
    spad_rdata <= spad[spad_raddr];
    for (int c = 0; c < COLS; c++) wbuf_rdata[c] <= vec[wbuf_raddr][c];
    dec_out_valid  <= dec_in_valid;
    simd_out_valid <= psum_valid;
  end
  // encoder model
  int ecyc = -1;
  assign enc_last = (ecyc >= 0) && (enc_stop || ecyc == 2);
  always_ff @(posedge clk) begin
    psum_valid <= enc_last;
    if (enc_load) ecyc <= 0;
    else if (enc_last) ecyc <= -1;
    else if (ecyc >= 0) ecyc <= ecyc + 1;
  end
  // DMA model
  int ncmd = 0, dcnt = -1;
  bit xlong = 0, x_pend = 0;
  int n_overlap = 0;
  always_ff @(posedge clk) begin
    dma_done <= 1'b0;
    if (dcnt > 0) dcnt <= dcnt - 1;
    if (dcnt == 0) begin dma_done <= 1'b1; dcnt <= -1; x_pend <= 1'b0; end
    if (dma_cmd_valid) begin
      dcnt <= (ncmd % 3 == 1 && xlong) ? $urandom_range(40, 60) : $urandom_range(2, 9);
      if (ncmd % 3 == 1) x_pend <= 1'b1;
      case (ncmd % 3)
        0: chk(!dma_cmd_write && dma_cmd_addr == 32'h1000 && dma_cmd_local == 0 && dma_cmd_len == NR, "weight load cmd");
        1: chk(!dma_cmd_write && dma_cmd_addr == 32'h8000 && dma_cmd_local == SD/2 && dma_cmd_len == KT*COLS, "input load cmd");
        2: chk(dma_cmd_write && dma_cmd_addr == 32'hC000 && dma_cmd_len == M*ROWS/2, "write-back cmd");
      endcase
      ncmd <= ncmd + 1;
    end
  end

  // ---- monitors ----
  int n_dec = 0, n_wb = 0, n_ib = 0, n_pre = 0, n_vec = 0, n_obuf = 0, exp_len, stream_len;
  int cur_kt = 0, cur_m = 0;
  logic [2:0] ibuf_raddr_q;
  logic [6:0] wbuf_raddr_q;
  always @(posedge clk) if (rst_n) begin
    ibuf_raddr_q <= ibuf_raddr;
    wbuf_raddr_q <= wbuf_raddr;
    if (dec_in_valid) begin chk(dec_in_word == spad[n_dec % NR], "decoder word"); n_dec++; end
    if (dec_in_valid && x_pend) n_overlap++;
    if (wbuf_we) begin chk(wbuf_waddr == 5'(n_wb % NR), "weight-buffer row"); n_wb++; end
    if (ibuf_we) begin
      chk(ibuf_waddr_e == 3'((n_ib % COLS)) && ibuf_wdata == spad[SD/2 + n_ib % (KT * COLS)] && !x_pend, "input-buffer fill");
      n_ib++;
    end
    if (arr_preload) begin chk(ibuf_raddr_q == 3'(COLS - 1 - (n_pre % COLS)), "preload order"); n_pre++; end
    if (enc_load) begin
      cur_kt = (n_vec % (M * KT)) / M; cur_m = n_vec % M;
      chk(wbuf_raddr_q == 7'(cur_m * KT + cur_kt), "vector address");
      exp_len = 1;
      for (int c = 0; c < COLS; c++) if (vec[cur_m*KT + cur_kt][c][1:0] > exp_len) exp_len = vec[cur_m*KT + cur_kt][c][1:0];
      stream_len = 0;
      n_vec++;
    end
    if (ecyc >= 0) begin
      stream_len++;
      if (enc_last) chk(stream_len == exp_len, "stream length");
    end
    if (obuf_we) begin
      chk(obuf_waddr == 4'(cur_m) && simd_accumulate == (cur_kt != 0) && simd_last == (cur_kt == KT-1), "vector unit / output row");
      n_obuf++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < SD; i++) spad[i] = {$urandom, $urandom};
    for (int v = 0; v < WD*3; v++)
      for (int c = 0; c < COLS; c++)
        vec[v][c] = (v % 2 == 0) ? 3'($urandom_range(0, 1)) : 3'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      xlong = (run == 1);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      chk(busy, "busy after start");
      while (!done) @(negedge clk);
      chk(ncmd == 3 * (run + 1), "three DMA commands");
      chk(n_dec == NR * (run + 1) && n_wb == NR * (run + 1), "all decoder rows");
      chk(n_ib == KT * COLS * (run + 1), "input-buffer words");
      chk(n_pre == KT * COLS * (run + 1), "preload columns");
      chk(n_vec == M * KT * (run + 1) && n_obuf == M * KT * (run + 1), "vectors");
      chk(n_early_stop > 0 && n_full_stream > 0 && n_early_stop + n_full_stream == M * KT * (run + 1), "stream counters");
      chk(n_overlap > 0, "decode during the input DMA");
      $display("run %0d: %0d decoder rows fed while the input DMA was running", run, n_overlap);
      n_overlap = 0;
      @(negedge clk);
      chk(!busy, "idle at the end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

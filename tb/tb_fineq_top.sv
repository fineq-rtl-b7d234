// tb_fineq_top: end-to-end test of the accelerator at a reduced size
// (8 x 8 PE array, 8 decoders).
//
// Builds a random layer in the behavioural AXI memory: M channels of K
// packed weights (random encodings per cluster pair, values that fit each
// encoding; the first 24 weights of channel 0 are the four quantized rows of
// the source's quantization example, index byte 00 10 00 11) and a K x ROWS
// matrix of signed 8-bit inputs. Runs the layer twice, with ReLU and without
// (an activation-mode switch), and compares every output word with
// act(sum_k W[m][k] * X[k][r]) computed here from the unpacked values. It
// counts the mechanisms the design has and fails if one never happened: each
// of the four cluster encodings, early-stopped and full-length bitstreams
// (their counts must also match those predicted from the weights), K-tile
// accumulation, ReLU clamping, and AXI back-pressure.
module tb_fineq_top;
  import fineq_pkg::*;
  localparam int ROWS = 8, COLS = 8, N_DEC = 8;
  localparam int M = 5, KT = 6;
  localparam int K = KT * COLS;
  localparam int WPR = N_DEC * 3;                         // weights per decoder row
  localparam int WPG = (N_DEC / 8 * 56 + 63) / 64;        // words per decoder row
  localparam int NR = M * KT / 3;
  localparam logic [31:0] WA = 32'h0000_1000, XA = 32'h0002_0000, OA0 = 32'h0004_0000, OA1 = 32'h0006_0000;
  localparam int MAXCYC = 400000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic [31:0] cfg_o_addr;
  act_e cfg_act;
  logic busy, done, dma_err;
  logic [31:0] n_early_stop, n_full_stream;
  logic [31:0] araddr, awaddr;
  logic arvalid, arready, rvalid, rready, awvalid, awready, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata;
  logic [1:0] rresp, bresp;
  logic [7:0] wstrb;
  int stall_cycles;

  fineq_top #(.ROWS(ROWS), .COLS(COLS), .N_DEC(N_DEC), .SPAD_DEPTH(1024),
              .WBUF_DEPTH(32), .OBUF_DEPTH(16)) dut (
    .clk, .rst_n, .start, .cfg_w_addr(WA), .cfg_x_addr(XA), .cfg_o_addr,
    .cfg_m(16'(M)), .cfg_kt(8'(KT)), .cfg_act, .busy, .done, .dma_err,
    .n_early_stop, .n_full_stream,
    .m_axi_araddr(araddr), .m_axi_arvalid(arvalid), .m_axi_arready(arready),
    .m_axi_rdata(rdata), .m_axi_rresp(rresp), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.WORDS(65536)) u_mem (
    .clk, .rst_n, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready,
    .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .stall_cycles);

  int checks = 0, failures = 0;
  int Wv [M][K];
  int Xv [K][ROWS];
  int enc_seen [4];
  int n_clamp = 0, exp_early = 0, exp_full = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // quantized rows of the source's example: (values, encoding) per cluster pair
  int EX [4][6] = '{'{1,1,1,1,1,0}, '{3,0,1,2,0,2}, '{1,1,1,1,1,1}, '{2,2,0,2,3,0}};
  int EXE [4] = '{0, 2, 0, 3};

  function automatic logic [5:0] pack_cluster(input int enc, input int v [3]);
    logic [5:0] d;
    int k;
    d = '0;
    k = 0;
    for (int j = 0; j < 3; j++) begin
      if (enc == 0) begin
        d[2*j]   = (v[j] != 0);
        d[2*j+1] = (v[j] < 0);
      end else if (j != enc - 1) begin
        d[3*k +: 2] = 2'(v[j] < 0 ? -v[j] : v[j]);
        d[3*k+2]    = (v[j] < 0);
        k++;
      end
    end
    return d;
  endfunction

  task automatic build_layer();
    logic [WPG*64-1:0] row;
    logic [55:0] grp;
    int enc, base, all2;
    int v [3];
    for (int m = 0; m < M; m++)
      for (int j = 0; j < KT / 3; j++) begin
        row = '0;
        all2 = $urandom_range(0, 1);
        for (int g = 0; g < N_DEC / 8; g++) begin
          grp = '0;
          for (int p = 0; p < 4; p++) begin
            enc = all2 ? 0 : $urandom_range(0, 3);
            if (m == 0 && j == 0 && g == 0) enc = EXE[p];
            enc_seen[enc]++;
            grp[2*p +: 2] = 2'(enc);
            for (int h = 0; h < 2; h++) begin
              for (int i = 0; i < 3; i++) begin
                if (enc == 0) v[i] = $urandom_range(0, 1);
                else          v[i] = (i == enc - 1) ? 0 : $urandom_range(0, 3);
                if ($urandom_range(0, 1)) v[i] = -v[i];
                if (m == 0 && j == 0 && g == 0) v[i] = EX[p][3*h + i];
              end
              grp[8 + 6*(2*p + h) +: 6] = pack_cluster(enc, v);
              base = WPR * j + 3 * (8 * g + 2 * p + h);
              for (int i = 0; i < 3; i++) Wv[m][base + i] = v[i];
            end
          end
          row[56*g +: 56] = grp;
        end
        for (int w = 0; w < WPG; w++)
          u_mem.mem[WA/8 + (m * KT / 3 + j) * WPG + w] = row[64*w +: 64];
      end
    for (int k = 0; k < K; k++)
      for (int r = 0; r < ROWS; r++) begin
        Xv[k][r] = $urandom_range(0, 255) - 128;
        u_mem.mem[XA/8 + (k * ROWS + r) / 8][8 * (r % 8) +: 8] = 8'(Xv[k][r]);
      end
    // predicted stream lengths per (channel, K-tile) vector
    for (int m = 0; m < M; m++)
      for (int t = 0; t < KT; t++) begin
        int mx;
        mx = 0;
        for (int c = 0; c < COLS; c++) begin
          int a;
          a = Wv[m][t*COLS + c] < 0 ? -Wv[m][t*COLS + c] : Wv[m][t*COLS + c];
          if (a > mx) mx = a;
        end
        if (mx == TC_LEN) exp_full++; else exp_early++;
      end
  endtask

  task automatic run_and_check(input logic [31:0] oa, input act_e act);
    longint s;
    logic [31:0] got;
    int t0;
    @(negedge clk);
    cfg_o_addr = oa; cfg_act = act; start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    $display("layer (%s) took %0d cycles", act == ACT_RELU ? "ReLU" : "identity", cyc - t0);
    checks++;
    if (dma_err) failures++;
    for (int m = 0; m < M; m++)
      for (int r = 0; r < ROWS; r++) begin
        s = 0;
        for (int k = 0; k < K; k++) s += Wv[m][k] * Xv[k][r];
        if (act == ACT_RELU && s < 0) begin s = 0; n_clamp++; end
        got = u_mem.mem[(oa + 4 * (ROWS * m + r)) / 8][32 * (r % 2) +: 32];
        checks++;
        if (longint'(signed'(got)) != s) begin
          failures++;
          if (failures < 10) $display("O[%0d][%0d] got %0d exp %0d", m, r, signed'(got), s);
        end
      end
  endtask

  initial begin
    cfg_o_addr = OA0; cfg_act = ACT_RELU;
    build_layer();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_and_check(OA0, ACT_RELU);
    run_and_check(OA1, ACT_NONE);
    $display("encodings 00/01/10/11: %0d %0d %0d %0d; early stops %0d (exp %0d), full streams %0d (exp %0d); clamps %0d; AXI stalls %0d",
             enc_seen[0], enc_seen[1], enc_seen[2], enc_seen[3], n_early_stop, 2*exp_early,
             n_full_stream, 2*exp_full, n_clamp, stall_cycles);
    for (int e = 0; e < 4; e++) begin checks++; if (enc_seen[e] == 0) failures++; end
    checks += 7;
    if (n_early_stop != 32'(2 * exp_early)) failures++;
    if (n_full_stream != 32'(2 * exp_full)) failures++;
    if (exp_early == 0) failures++;
    if (exp_full == 0) failures++;
    if (KT < 2) failures++;              // K-tile accumulation exercised
    if (n_clamp == 0) failures++;
    if (stall_cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

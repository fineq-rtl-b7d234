// tb_fineq_llm_tile: one LLM-layer tile through the accelerator at its
// default size, with weights quantized the FineQ way inside the testbench.
//
// The tile is the largest one a single run takes: 64 output channels x
// K = 384 inputs x 64 columns (one 64-channel, 384-input slice of a LLaMA-2
// projection at a sequence chunk of 64). Float weights are drawn roughly
// normal (sum of four uniforms); a few channels carry large outliers, as is
// typical of LLM weights. Per channel the testbench:
//   - splits the row into clusters of three; a cluster is an outlier cluster
//     when its largest magnitude exceeds four times its smallest,
//   - uses s = max|w| / 3 (3-bit) if the channel has an outlier cluster and
//     s = max|w| / 1 (2-bit) otherwise, and rounds w / s,
//   - gives each pair of neighbouring clusters one shared encoding: the
//     common one if both agree, otherwise the one of the four with the
//     smaller total squared error over the pair,
//   - packs the pair's values into the 7-byte groups of the FineQ format.
// The accelerator's outputs must equal sum_k q[m][k] * X[k][r] exactly
// (identity activation). The testbench also reports how far s_m * output is
// from the float product, to show the quantized layer is still meaningful,
// and counts the encodings and the early-stopped streams.
module tb_fineq_llm_tile;
  import fineq_pkg::*;
  localparam int ROWS = 64, COLS = 64, N_DEC = 64;
  localparam int M = 64, KT = 6;
  localparam int K = KT * COLS;
  localparam int WPR = N_DEC * 3;
  localparam int WPG = (N_DEC / 8 * 56 + 63) / 64;
  localparam logic [31:0] WA = 32'h0000_1000, XA = 32'h0002_0000, OA = 32'h0004_0000;
  localparam int MAXCYC = 2000000;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic busy, done, dma_err;
  logic [31:0] n_early_stop, n_full_stream;
  logic [31:0] araddr, awaddr;
  logic arvalid, arready, rvalid, rready, awvalid, awready, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata;
  logic [1:0] rresp, bresp;
  logic [7:0] wstrb;
  int stall_cycles;

  fineq_top dut (
    .clk, .rst_n, .start, .cfg_w_addr(WA), .cfg_x_addr(XA), .cfg_o_addr(OA),
    .cfg_m(16'(M)), .cfg_kt(8'(KT)), .cfg_act(ACT_NONE), .busy, .done, .dma_err,
    .n_early_stop, .n_full_stream,
    .m_axi_araddr(araddr), .m_axi_arvalid(arvalid), .m_axi_arready(arready),
    .m_axi_rdata(rdata), .m_axi_rresp(rresp), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awvalid(awvalid), .m_axi_awready(awready),
    .m_axi_wdata(wdata), .m_axi_wstrb(wstrb), .m_axi_wvalid(wvalid), .m_axi_wready(wready),
    .m_axi_bresp(bresp), .m_axi_bvalid(bvalid), .m_axi_bready(bready));

  axi_mem_model #(.WORDS(65536), .STALL(1'b0)) u_mem (
    .clk, .rst_n, .araddr, .arvalid, .arready, .rdata, .rresp, .rvalid, .rready,
    .awaddr, .awvalid, .awready, .wdata, .wstrb, .wvalid, .wready, .bresp, .bvalid, .bready,
    .stall_cycles);

  int checks = 0, failures = 0;
  real Wf [M][K];
  real sc [M];
  int  Q [M][K];
  int  Xv [K][ROWS];
  int  Penc [M][K/6];
  int  enc_seen [4];
  int  cyc = 0;
  always @(posedge clk) cyc++;

  initial begin : watchdog
    repeat (MAXCYC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real randn();
    real s;
    s = 0.0;
    for (int i = 0; i < 4; i++) s += real'($urandom_range(0, 100000)) / 100000.0;
    return (s - 2.0) * 1.732;   // unit variance
  endfunction

  function automatic real rabs(input real x);
    return x < 0.0 ? -x : x;
  endfunction

  function automatic int qround(input real x, input int lim);
    int q;
    q = (x < 0.0) ? -$rtoi(-x + 0.5) : $rtoi(x + 0.5);
    if (q > lim) q = lim;
    if (q < -lim) q = -lim;
    return q;
  endfunction

  // natural encoding of one cluster: 0 = all 2-bit, else 1 + index of the zero
  function automatic int nat_enc(input real a, input real b, input real c);
    real mx, mn;
    int imn;
    mx = rabs(a); if (rabs(b) > mx) mx = rabs(b); if (rabs(c) > mx) mx = rabs(c);
    mn = rabs(a); imn = 0;
    if (rabs(b) < mn) begin mn = rabs(b); imn = 1; end
    if (rabs(c) < mn) begin mn = rabs(c); imn = 2; end
    return (mx > 4.0 * mn) ? imn + 1 : 0;
  endfunction

  // quantize a cluster under an encoding; returns squared error
  function automatic real quant(input real w [3], input real s, input int enc, output int q [3]);
    real e;
    e = 0.0;
    for (int j = 0; j < 3; j++) begin
      if (enc == 0)            q[j] = qround(w[j] / s, 1);
      else if (j == enc - 1)   q[j] = 0;
      else                     q[j] = qround(w[j] / s, 3);
      e += (w[j] - s * q[j]) * (w[j] - s * q[j]);
    end
    return e;
  endfunction

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
    real mx, e, best;
    real wa [3], wb [3];
    int qa [3], qb [3], ta [3], tb [3];
    bit outl;
    int ea, eb, enc, base;
    logic [WPG*64-1:0] row;
    for (int m = 0; m < M; m++) begin
      for (int k = 0; k < K; k++) begin
        Wf[m][k] = 0.02 * randn();
        // outlier channels: every 8th channel holds a few large weights
        if (m % 8 == 3 && $urandom_range(0, 19) == 0) Wf[m][k] = Wf[m][k] * 12.0;
      end
      mx = 0.0; outl = 1'b0;
      for (int k = 0; k < K; k++) if (rabs(Wf[m][k]) > mx) mx = rabs(Wf[m][k]);
      for (int c = 0; c < K / 3; c++)
        if (nat_enc(Wf[m][3*c], Wf[m][3*c+1], Wf[m][3*c+2]) != 0) outl = 1'b1;
      sc[m] = outl ? mx / 3.0 : mx;
      // cluster pairs
      for (int p = 0; p < K / 6; p++) begin
        for (int j = 0; j < 3; j++) begin wa[j] = Wf[m][6*p + j]; wb[j] = Wf[m][6*p + 3 + j]; end
        ea = nat_enc(wa[0], wa[1], wa[2]);
        eb = nat_enc(wb[0], wb[1], wb[2]);
        if (!outl) begin ea = 0; eb = 0; end
        if (ea == eb) begin
          enc = ea;
          void'(quant(wa, sc[m], enc, qa));
          void'(quant(wb, sc[m], enc, qb));
        end else begin
          best = 1.0e30; enc = 0;
          for (int t = 0; t < 4; t++) begin
            e = quant(wa, sc[m], t, ta) + quant(wb, sc[m], t, tb);
            if (e < best) begin best = e; enc = t; qa = ta; qb = tb; end
          end
        end
        enc_seen[enc]++;
        Penc[m][p] = enc;
        for (int j = 0; j < 3; j++) begin Q[m][6*p + j] = qa[j]; Q[m][6*p + 3 + j] = qb[j]; end
      end
      // pack: decoder row j = weights 192j.., group g = 24 weights, pair p in group
      for (int j = 0; j < KT / 3; j++) begin
        row = '0;
        for (int g = 0; g < N_DEC / 8; g++)
          for (int p = 0; p < 4; p++) begin
            int v [3];
            base = WPR * j + 24 * g + 6 * p;
            enc = Penc[m][base / 6];
            row[56*g + 2*p +: 2] = 2'(enc);
            for (int h = 0; h < 2; h++) begin
              for (int i = 0; i < 3; i++) v[i] = Q[m][base + 3*h + i];
              row[56*g + 8 + 6*(2*p + h) +: 6] = pack_cluster(enc, v);
            end
          end
        for (int w = 0; w < WPG; w++)
          u_mem.mem[WA/8 + (m * KT / 3 + j) * WPG + w] = row[64*w +: 64];
      end
    end
    for (int k = 0; k < K; k++)
      for (int r = 0; r < ROWS; r++) begin
        Xv[k][r] = $urandom_range(0, 255) - 128;
        u_mem.mem[XA/8 + (k * ROWS + r) / 8][8 * (r % 8) +: 8] = 8'(Xv[k][r]);
      end
  endtask

  initial begin
    longint s;
    real fl, err2, ref2;
    logic [31:0] got;
    int t0;
    build_layer();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (!done) @(negedge clk);
    $display("tile %0dx%0dx%0d took %0d cycles; early stops %0d, full streams %0d",
             M, K, ROWS, cyc - t0, n_early_stop, n_full_stream);
    err2 = 0.0; ref2 = 0.0;
    for (int m = 0; m < M; m++)
      for (int r = 0; r < ROWS; r++) begin
        s = 0; fl = 0.0;
        for (int k = 0; k < K; k++) begin
          s += Q[m][k] * Xv[k][r];
          fl += Wf[m][k] * Xv[k][r];
        end
        got = u_mem.mem[(OA + 4 * (ROWS * m + r)) / 8][32 * (r % 2) +: 32];
        checks++;
        if (longint'(signed'(got)) != s) begin
          failures++;
          if (failures < 10) $display("O[%0d][%0d] got %0d exp %0d", m, r, signed'(got), s);
        end
        err2 += (sc[m] * real'(signed'(got)) - fl) ** 2;
        ref2 += fl * fl;
      end
    $display("encodings 00/01/10/11: %0d %0d %0d %0d; relative output error of the quantized layer %f",
             enc_seen[0], enc_seen[1], enc_seen[2], enc_seen[3], $sqrt(err2 / ref2));
    checks += 4;
    if (dma_err) failures++;
    if (n_early_stop == 0) failures++;
    if (n_full_stream == 0) failures++;
    if (enc_seen[1] + enc_seen[2] + enc_seen[3] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

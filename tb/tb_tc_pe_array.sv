// tb_tc_pe_array: the PE array with its encoder and accumulators.
//
// Part 1 replays the worked example of the source at 4 x 4: weights
// [1 1 2 2] times the input matrix [8 4 2 3; 7 9 6 6; 9 5 8 8; 1 3 1 6] must
// give partial results 25 21 17 23 after the first bitstream cycle and
// 35 29 26 37 after the second (the stream is stopped after two cycles, the
// largest magnitude). Part 2 runs an 8 x 8 array with random signed inputs
// and weights and random stream lengths, and checks every result against
// sum_c w[c]*X[c][r] and that psum_valid rises in the clock after the L-th bitstream cycle.
module tb_tc_pe_array;
  import fineq_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- 4 x 4 worked example ----------------
  logic a_pre = 0, a_load = 0, a_stop = 0, a_act, a_last, a_pv;
  logic signed [7:0] a_pd [4];
  wq_t a_w [4];
  logic signed [ACT_W+MAG_W+2+1-1:0] a_ps [4];
  tc_pe_array #(.ROWS(4), .COLS(4)) u_a (
    .clk, .rst_n, .preload(a_pre), .preload_data(a_pd), .enc_load(a_load), .enc_w(a_w),
    .enc_stop(a_stop), .enc_active(a_act), .enc_last(a_last), .psum(a_ps), .psum_valid(a_pv));

  // ---------------- 8 x 8 random ----------------
  localparam int R = 8, C = 8;
  logic b_pre = 0, b_load = 0, b_stop = 0, b_act, b_last, b_pv;
  logic signed [7:0] b_pd [R];
  wq_t b_w [C];
  logic signed [ACT_W+MAG_W+$clog2(C)+1-1:0] b_ps [R];
  tc_pe_array #(.ROWS(R), .COLS(C)) u_b (
    .clk, .rst_n, .preload(b_pre), .preload_data(b_pd), .enc_load(b_load), .enc_w(b_w),
    .enc_stop(b_stop), .enc_active(b_act), .enc_last(b_last), .psum(b_ps), .psum_valid(b_pv));

  int X4 [4][4] = '{'{8,4,2,3}, '{7,9,6,6}, '{9,5,8,8}, '{1,3,1,6}};
  int W4 [4] = '{1,1,2,2};
  int P1 [4] = '{25,21,17,23};
  int P2 [4] = '{35,29,26,37};
  int X [C][R];
  int wi [C];
  int len, maxm, lat, exp_v;

  initial begin
    foreach (a_pd[r]) a_pd[r] = '0;
    foreach (a_w[c]) a_w[c] = '0;
    foreach (b_pd[r]) b_pd[r] = '0;
    foreach (b_w[c]) b_w[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // preload: PE(r,c) must hold X4[c][r]; column c = 3 enters first
    for (int c = 3; c >= 0; c--) begin
      @(negedge clk);
      a_pre = 1;
      for (int r = 0; r < 4; r++) a_pd[r] = 8'(X4[c][r]);
    end
    @(negedge clk);
    a_pre = 0;
    a_load = 1;
    for (int c = 0; c < 4; c++) a_w[c] = '{sign: 1'b0, mag: 2'(W4[c])};
    @(negedge clk);
    a_load = 0;
    @(posedge clk); #1;        // after the first bitstream cycle
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (int'(a_ps[r]) != P1[r]) begin failures++; $display("step 2 row %0d: %0d", r, a_ps[r]); end
    end
    @(negedge clk);
    a_stop = 1;                // largest magnitude is 2: second cycle is the last
    @(posedge clk); #1;
    a_stop = 0;
    checks++;
    if (!a_pv) failures++;
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (int'(a_ps[r]) != P2[r]) begin failures++; $display("step 3 row %0d: %0d", r, a_ps[r]); end
    end

    // random 8 x 8
    for (int n = 0; n < 100; n++) begin
      for (int c = 0; c < C; c++)
        for (int r = 0; r < R; r++) X[c][r] = $urandom_range(0, 255) - 128;
      for (int c = C-1; c >= 0; c--) begin
        @(negedge clk);
        b_pre = 1;
        for (int r = 0; r < R; r++) b_pd[r] = 8'(X[c][r]);
      end
      @(negedge clk);
      b_pre = 0;
      for (int v = 0; v < 4; v++) begin   // several weight vectors per preload
        maxm = 0;
        for (int c = 0; c < C; c++) begin
          b_w[c] = 3'($urandom);
          if (v == 0) b_w[c].mag = b_w[c].mag & 2'b01;   // 2-bit-only vector
          wi[c] = b_w[c].sign ? -int'(b_w[c].mag) : int'(b_w[c].mag);
          if (b_w[c].mag > maxm) maxm = b_w[c].mag;
        end
        len = (maxm == 0) ? 1 : maxm;
        b_load = 1;
        @(negedge clk);
        b_load = 0;
        lat = 0;
        while (!b_pv && lat < 10) begin
          b_stop = (lat == len - 1);
          @(negedge clk);
          b_stop = 0;
          lat++;
        end
        checks++;
        if (lat != len) begin failures++; $display("latency %0d for length %0d", lat, len); end
        for (int r = 0; r < R; r++) begin
          exp_v = 0;
          for (int c = 0; c < C; c++) exp_v += wi[c] * X[c][r];
          checks++;
          if (int'(b_ps[r]) != exp_v) begin
            failures++;
            if (failures < 8) $display("n=%0d v=%0d row %0d got %0d exp %0d", n, v, r, b_ps[r], exp_v);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

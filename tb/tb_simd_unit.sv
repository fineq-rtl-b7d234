// tb_simd_unit: random partial sums through the vector unit in all four
// combinations of accumulate / last and both activation modes; the result
// must be psum (+ prev when accumulating), clamped at zero on the last
// K-tile with ReLU, one clock after in_valid.
module tb_simd_unit;
  import fineq_pkg::*;
  localparam int L = 64, IW = 17;
  logic clk = 0, rst_n = 0, in_valid = 0, accumulate = 0, last = 0, out_valid;
  logic signed [IW-1:0] psum [L];
  logic signed [31:0] prev [L];
  logic signed [31:0] out [L];
  act_e act_mode = ACT_NONE;
  int checks = 0, failures = 0, n_clamp = 0;
  longint e [L];

  simd_unit #(.LANES(L), .IN_W(IW)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (psum[i]) begin psum[i] = '0; prev[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      in_valid = 1;
      accumulate = n[0]; last = n[1]; act_mode = act_e'(n[2]);
      for (int i = 0; i < L; i++) begin
        psum[i] = IW'($urandom_range(0, 1 << IW) - (1 << (IW-1)));
        prev[i] = $urandom_range(0, 200000) - 100000;
        e[i] = longint'(psum[i]) + (accumulate ? longint'(prev[i]) : 0);
        if (last && act_mode == ACT_RELU && e[i] < 0) begin e[i] = 0; n_clamp++; end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (longint'(out[i]) != e[i]) begin
          failures++;
          if (failures < 5) $display("n=%0d lane %0d got %0d exp %0d", n, i, out[i], e[i]);
        end
      end
    end
    checks++;
    if (n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

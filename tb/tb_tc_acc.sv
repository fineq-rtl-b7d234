// tb_tc_acc: random PE outputs and weight signs for 1..3 cycles per vector;
// the accumulator must equal the sum over cycles and columns of +-pe_out,
// computed here with plain integers.
module tb_tc_acc;
  import fineq_pkg::*;
  localparam int COLS = 64;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic signed [7:0] pe_out [COLS];
  logic [COLS-1:0] signs;
  logic signed [16:0] acc;
  int checks = 0, failures = 0, exp_acc, len;

  tc_acc #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (pe_out[c]) pe_out[c] = '0;
    signs = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      len = $urandom_range(1, 3);
      exp_acc = 0;
      signs = {$urandom, $urandom};
      for (int t = 0; t < len; t++) begin
        @(negedge clk);
        valid = 1; clear = (t == 0);
        for (int c = 0; c < COLS; c++) begin
          // extremes now and then
          pe_out[c] = (n % 7 == 0) ? -8'sd128 : 8'($urandom);
          exp_acc += signs[c] ? -int'(pe_out[c]) : int'(pe_out[c]);
        end
      end
      @(negedge clk);
      valid = 0; clear = 0;
      checks++;
      if (int'(acc) != exp_acc) begin
        failures++;
        if (failures < 5) $display("vector %0d got %0d exp %0d", n, acc, exp_acc);
      end
      // holds while valid is low
      @(negedge clk);
      checks++;
      if (int'(acc) != exp_acc) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

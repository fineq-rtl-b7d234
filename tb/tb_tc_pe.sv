// tb_tc_pe: shifts random activations through one PE and checks the shift
// path (act_out is the previous act_in), the hold when shift is low and the
// selector (pe_out = activation when the bitstream bit is 1, else 0).
module tb_tc_pe;
  import fineq_pkg::*;
  logic clk = 0, rst_n = 0, shift = 0, bit_in = 0;
  logic signed [7:0] act_in = '0, act_out, pe_out, held;
  int checks = 0, failures = 0;

  tc_pe dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      shift = $urandom_range(0, 1);
      act_in = 8'($urandom);
      if (shift) held = act_in;
      @(negedge clk);
      shift = 0;
      act_in = 8'($urandom);
      checks++;
      if (n > 0 && act_out !== held) failures++;
      bit_in = 1; #1;
      checks++;
      if (n > 0 && pe_out !== held) failures++;
      bit_in = 0; #1;
      checks++;
      if (pe_out !== 8'sd0) failures++;
      if (n == 0) held = act_out;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_temporal_encoder: for every 3-bit weight, loads it and sweeps the
// counter 0..3 with active high and low; the lane must emit 1 exactly while
// the counter is below the magnitude (so the ones count the magnitude), and
// hold the sign.
module tb_temporal_encoder;
  import fineq_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, active = 0, bit_out, sign_out;
  wq_t w_in;
  logic [1:0] cnt = '0;
  int checks = 0, failures = 0, ones;

  temporal_encoder dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++)
      for (int v = 0; v < 8; v++) begin
        @(negedge clk);
        load = 1; w_in = 3'(v);
        @(negedge clk);
        load = 0; w_in = ~w_in;       // value must be held in the register
        ones = 0;
        for (int c = 0; c < 4; c++) begin
          cnt = 2'(c);
          active = 1; #1;
          checks++;
          if (bit_out !== (v[1:0] > c)) failures++;
          ones += int'(bit_out);
          active = 0; #1;
          checks++;
          if (bit_out !== 1'b0) failures++;
        end
        checks += 2;
        if (ones != v[1:0]) failures++;
        if (sign_out !== v[2]) failures++;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_weight_buffer: writes random 192-weight rows and reads every 64-weight
// vector back; vector v must be weights 64*(v mod 3) .. +63 of row v/3.
module tb_weight_buffer;
  import fineq_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, we = 0;
  logic [3:0] waddr = '0;
  logic [5:0] raddr = '0;
  wq_t wdata [192];
  wq_t rdata [64];
  logic [2:0] model [DEPTH][192];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(DEPTH), .N_DEC(64), .COLS(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      we = 1; waddr = 4'(r);
      for (int i = 0; i < 192; i++) begin
        wdata[i] = 3'($urandom);
        model[r][i] = wdata[i];
      end
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 200; n++) begin
      int v;
      v = (n < DEPTH*3) ? n : $urandom_range(0, DEPTH*3-1);
      @(negedge clk);
      raddr = 6'(v);
      @(posedge clk); #1;
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (rdata[i] !== model[v/3][64*(v%3) + i]) begin
          failures++;
          if (failures < 5) $display("vector %0d weight %0d got %0d", v, i, rdata[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

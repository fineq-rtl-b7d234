// tb_output_buffer: writes random result rows, then reads them back row-wise
// and word-wise; word i of row m must hold lanes 2i (low) and 2i+1 (high).
module tb_output_buffer;
  import fineq_pkg::*;
  localparam int D = 16, L = 64;
  logic clk = 0, we = 0;
  logic [3:0] waddr = '0, raddr = '0;
  logic [8:0] wd_raddr = '0;
  logic signed [31:0] wdata [L];
  logic signed [31:0] rdata [L];
  logic [63:0] wd_rdata;
  logic [31:0] model [D][L];
  int checks = 0, failures = 0;

  output_buffer #(.DEPTH(D), .LANES(L), .DW(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < D; m++) begin
      @(negedge clk);
      we = 1; waddr = 4'(m);
      for (int i = 0; i < L; i++) begin wdata[i] = $urandom; model[m][i] = wdata[i]; end
    end
    @(negedge clk); we = 0;
    for (int m = D-1; m >= 0; m--) begin
      @(negedge clk); raddr = 4'(m);
      @(posedge clk); #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (rdata[i] !== model[m][i]) failures++;
      end
    end
    for (int n = 0; n < 300; n++) begin
      int a;
      a = $urandom_range(0, D*L/2 - 1);
      @(negedge clk); wd_raddr = 9'(a);
      @(posedge clk); #1;
      checks++;
      if (wd_rdata !== {model[a/32][2*(a%32)+1], model[a/32][2*(a%32)]}) begin
        failures++;
        if (failures < 5) $display("word %0d got %h", a, wd_rdata);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

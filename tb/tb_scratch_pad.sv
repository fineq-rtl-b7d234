// tb_scratch_pad: random writes and reads against a model array; checks the
// one-clock read latency and that a read and a write in the same clock to
// different words do not disturb each other.
module tb_scratch_pad;
  localparam int DEPTH = 256;
  logic clk = 0;
  logic we = 0;
  logic [7:0] waddr = '0, raddr = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model [DEPTH];
  logic [63:0] exp_d;
  int checks = 0, failures = 0;

  scratch_pad #(.DEPTH(DEPTH), .DW(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1; waddr = 8'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      raddr = 8'($urandom_range(0, DEPTH-1));
      exp_d = model[raddr];
      we = $urandom_range(0, 1);
      waddr = 8'($urandom_range(0, DEPTH-1));
      if (waddr == raddr) waddr = waddr + 1'b1;
      wdata = {$urandom, $urandom};
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        if (failures < 5) $display("addr %0d got %h exp %h", raddr, rdata, exp_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_input_buffer: fills all entries word by word with random activations and
// reads each entry back; activation r of an entry is byte r%8 of word r/8.
module tb_input_buffer;
  import fineq_pkg::*;
  localparam int ROWS = 64, ENTRIES = 64;
  logic clk = 0, we = 0;
  logic [5:0] waddr_e = '0, raddr = '0;
  logic [2:0] waddr_w = '0;
  logic [63:0] wdata = '0;
  logic signed [7:0] rdata [ROWS];
  logic [7:0] model [ENTRIES][ROWS];
  int checks = 0, failures = 0;

  input_buffer #(.ROWS(ROWS), .ENTRIES(ENTRIES), .DW(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < ENTRIES; e++)
      for (int w = 0; w < 8; w++) begin
        @(negedge clk);
        we = 1; waddr_e = 6'(e); waddr_w = 3'(w); wdata = {$urandom, $urandom};
        for (int b = 0; b < 8; b++) model[e][8*w + b] = wdata[8*b +: 8];
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3 * ENTRIES; n++) begin
      int e;
      e = (n < ENTRIES) ? ENTRIES - 1 - n : $urandom_range(0, ENTRIES-1);
      @(negedge clk);
      raddr = 6'(e);
      @(posedge clk); #1;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (rdata[r] !== model[e][r]) begin
          failures++;
          if (failures < 5) $display("entry %0d row %0d got %h exp %h", e, r, rdata[r], model[e][r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

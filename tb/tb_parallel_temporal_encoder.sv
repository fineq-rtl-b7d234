// tb_parallel_temporal_encoder: loads random weight vectors and lets each
// stream run to its end or stops it at a random cycle. Every bitstream cycle
// t must carry (magnitude > t) on each column, signs must match, last must
// mark the final cycle, and the stream must last exactly min(stop+1, 3)
// cycles (the cycle count is checked against the fixed length 3).
module tb_parallel_temporal_encoder;
  import fineq_pkg::*;
  localparam int COLS = 16;
  logic clk = 0, rst_n = 0, load = 0, stop = 0, active, last;
  wq_t w [COLS];
  wq_t wv [COLS];
  logic [COLS-1:0] bits, signs;
  int checks = 0, failures = 0, stop_at, cycles, n_early = 0, n_full = 0;

  parallel_temporal_encoder #(.COLS(COLS)) dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (w[c]) w[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      load = 1;
      foreach (w[c]) begin w[c] = 3'($urandom); wv[c] = w[c]; end
      stop_at = $urandom_range(0, 3);   // 3: never stop
      @(negedge clk);
      load = 0;
      foreach (w[c]) w[c] = '0;
      cycles = 0;
      while (active) begin
        stop = (cycles == stop_at);
        #1;
        for (int c = 0; c < COLS; c++) begin
          checks += 2;
          if (bits[c] !== (wv[c].mag > cycles)) failures++;
          if (signs[c] !== wv[c].sign) failures++;
        end
        checks++;
        if (last !== (cycles == stop_at || cycles == TC_LEN - 1)) failures++;
        cycles++;
        @(negedge clk);
        stop = 0;
        if (cycles > TC_LEN) break;
      end
      checks++;
      if (cycles != ((stop_at < TC_LEN) ? stop_at + 1 : TC_LEN)) begin
        failures++;
        $display("vector %0d ran %0d cycles, stop at %0d", n, cycles, stop_at);
      end
      if (cycles < TC_LEN) n_early++; else n_full++;
      checks++;
      if (bits !== '0) failures++;
    end
    checks += 2;
    if (n_early == 0) failures++;
    if (n_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

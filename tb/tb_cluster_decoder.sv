// tb_cluster_decoder: exhaustive test of the cluster decoder.
//
// Applies all 64 data patterns under all four encodings, back to back, and
// checks the three signed weights one clock later against a reference that
// decodes the encoding table directly (00: three 2-bit sign-magnitude values,
// 01/10/11: two 3-bit values with value 0/1/2 forced to zero).
module tb_cluster_decoder;
  import fineq_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [5:0] data;
  cluster_enc_e index;
  wq_t w [3];
  int checks = 0, failures = 0;

  cluster_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sm(input int s, input int m);
    return s ? -m : m;
  endfunction

  function automatic void ref_dec(input logic [5:0] d, input int idx, output int v [3]);
    int nz;
    if (idx == 0) begin
      for (int j = 0; j < 3; j++) v[j] = sm(d[2*j+1], d[2*j]);
    end else begin
      nz = 0;
      for (int j = 0; j < 3; j++) begin
        if (j == idx - 1) v[j] = 0;
        else begin
          v[j] = sm(d[3*nz+2], d[3*nz +: 2]);
          nz++;
        end
      end
    end
  endfunction

  int exp_v [3];
  int got;
  initial begin
    data = '0; index = ENC_ALL2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int idx = 0; idx < 4; idx++)
      for (int d = 0; d < 64; d++) begin
        @(negedge clk);
        in_valid = 1; data = 6'(d); index = cluster_enc_e'(idx);
        @(negedge clk);
        in_valid = 0; data = ~data;    // output must come from the register
        checks++;
        if (!out_valid) begin failures++; $display("out_valid missing"); end
        ref_dec(6'(d), idx, exp_v);
        for (int j = 0; j < 3; j++) begin
          got = sm(w[j].sign, w[j].mag);
          checks++;
          // a zero weight may carry either sign
          if (got != exp_v[j]) begin
            failures++;
            $display("idx=%0d d=%02h w%0d got %0d exp %0d", idx, d, j, got, exp_v[j]);
          end
        end
      end
    @(negedge clk);
    checks++;
    if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

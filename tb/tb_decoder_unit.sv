// tb_decoder_unit: random packed words through the 64-decoder unit.
//
// Builds each 448-bit word from random clusters: for each pair of clusters a
// random encoding and, per cluster, random values that fit it (2-bit or 3-bit
// sign-magnitude, zero where the encoding says). The packed word is assembled
// from those values by the group layout (index byte, then 6-bit clusters),
// and the 192 decoded weights are compared with the values. Also checks the
// one-clock latency and a streaming run of back-to-back words.
module tb_decoder_unit;
  import fineq_pkg::*;
  localparam int N_DEC = 64;
  localparam int NW = N_DEC * 3;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N_DEC/8*56-1:0] in_word;
  wq_t w [NW];
  int checks = 0, failures = 0;

  decoder_unit #(.N_DEC(N_DEC)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int val [NW];
  int exp_mem [64][NW];
  int wp = 0, rp = 0;
  int enc_seen [4];

  task automatic make_word();
    int enc, v0, v1, v2, base;
    logic [55:0] grp;
    logic [5:0] cd;
    int e [3];
    int c, k;
    for (int g = 0; g < N_DEC/8; g++) begin
      grp = '0;
      for (int p = 0; p < 4; p++) begin
        enc = $urandom_range(0, 3);
        enc_seen[enc]++;
        grp[2*p +: 2] = 2'(enc);
        for (int h = 0; h < 2; h++) begin
          c = 2*p + h;
          if (enc == 0) begin
            for (int j = 0; j < 3; j++) begin
              e[j] = $urandom_range(0, 1) ? 1 : 0;
              if ($urandom_range(0, 1)) e[j] = -e[j];
            end
            cd = 6'b0;
            for (int j = 0; j < 3; j++) begin
              cd[2*j+1] = (e[j] < 0);
              cd[2*j]   = (e[j] != 0);
            end
          end else begin
            k = 0;
            cd = 6'b0;
            for (int j = 0; j < 3; j++) begin
              if (j == enc - 1) e[j] = 0;
              else begin
                e[j] = $urandom_range(0, 3);
                if ($urandom_range(0, 1)) e[j] = -e[j];
                cd[3*k +: 2] = 2'(e[j] < 0 ? -e[j] : e[j]);
                cd[3*k+2]    = (e[j] < 0);
                k++;
              end
            end
          end
          grp[8 + 6*c +: 6] = cd;
          base = 3 * (8*g + c);
          for (int j = 0; j < 3; j++) val[base + j] = e[j];
        end
      end
      in_word[56*g +: 56] = grp;
    end
  endtask

  task automatic check_out();
    int exp_v [NW];
    int got;
    exp_v = exp_mem[rp]; rp++;
    checks++;
    if (!out_valid) begin failures++; $display("out_valid missing"); end
    for (int i = 0; i < NW; i++) begin
      got = w[i].sign ? -int'(w[i].mag) : int'(w[i].mag);
      checks++;
      if (got != exp_v[i]) begin
        failures++;
        if (failures < 10) $display("weight %0d got %0d exp %0d enc %0d word %h", i, got, exp_v[i], in_word[2*((i/3)%8/2) +: 2], in_word[55:0]);
      end
    end
  endtask

  initial begin
    in_word = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // single words with gaps
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      make_word(); exp_mem[wp] = val; wp++; in_valid = 1;
      @(negedge clk);
      in_valid = 0; in_word = ~in_word;
      check_out();
    end
    // back-to-back stream
    @(negedge clk);
    for (int n = 0; n < 20; n++) begin
      make_word(); exp_mem[wp] = val; wp++; in_valid = 1;
      @(negedge clk);
      check_out();
    end
    in_valid = 0;
    for (int e = 0; e < 4; e++) begin
      checks++;
      if (enc_seen[e] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// cluster_decoder: decodes one FineQ weight cluster into three 3-bit weights.
//
// A cluster is 6 data bits and a 2-bit index. Index 00: three 2-bit values in
// bits 1:0, 3:2, 5:4. Index 01/10/11: value 0/1/2 is zero and the other two are
// 3-bit values in bits 2:0 (the earlier one) and 5:3 (the later one). Every
// value is sign-magnitude with the sign in its top bit; a 2-bit {s,m} is padded
// to the 3-bit {s,0,m}. The data and the index are registered, and three
// multiplexers (each with a constant 000 input) pick the field or the zero for
// each output, as in the decoder figure of the source. The bit placement inside
// each field and the registered index are this design's choices.
//
// Timing: out_valid and w follow in_valid, data and index by one clock.
module cluster_decoder
  import fineq_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [CL_DATA_W-1:0] data,
  input  cluster_enc_e         index,
  output logic                 out_valid,
  output wq_t                  w [CLUSTER]
);

  logic [CL_DATA_W-1:0] data_q;
  cluster_enc_e         index_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      data_q    <= '0;
      index_q   <= ENC_ALL2;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        data_q  <= data;
        index_q <= index;
      end
    end
  end

  // Field slices of the registered data
  wq_t f2 [CLUSTER];  // 2-bit fields, zero-padded magnitude
  wq_t f3 [2];        // 3-bit fields
  always_comb begin
    for (int j = 0; j < CLUSTER; j++)
      f2[j] = '{sign: data_q[2*j+1], mag: {1'b0, data_q[2*j]}};
    f3[0] = data_q[2:0];
    f3[1] = data_q[5:3];
  end

  // Output multiplexers
  always_comb begin
    unique case (index_q)
      ENC_ALL2:  begin w[0] = f2[0]; w[1] = f2[1]; w[2] = f2[2]; end
      ENC_ZERO0: begin w[0] = '0;    w[1] = f3[0]; w[2] = f3[1]; end
      ENC_ZERO1: begin w[0] = f3[0]; w[1] = '0;    w[2] = f3[1]; end
      ENC_ZERO2: begin w[0] = f3[0]; w[1] = f3[1]; w[2] = '0;    end
    endcase
  end

endmodule

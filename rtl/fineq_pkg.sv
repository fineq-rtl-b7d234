// fineq_pkg: types and constants shared by the FineQ accelerator.
//
// Weights are stored offline in clusters of three. A cluster is either three
// 2-bit values or two 3-bit values plus an implied zero, selected by a 2-bit
// encoding. After decoding, every weight is a 3-bit sign-magnitude value
// {sign, mag[1:0]} whose magnitude (0..3) becomes a temporal-code bitstream of
// up to TC_LEN cycles. Activations are 8-bit two's complement (this design's
// choice; the source names no activation width).
package fineq_pkg;

  localparam int ACT_W     = 8;   // activation width (assumed)
  localparam int MAG_W     = 2;   // weight magnitude bits after decoding
  localparam int WQ_W      = 3;   // decoded weight {sign, mag}
  localparam int TC_LEN    = 3;   // longest bitstream: largest magnitude 3
  localparam int CLUSTER   = 3;   // weights per cluster
  localparam int CL_DATA_W = 6;   // data bits per cluster
  localparam int GRP_CL    = 8;   // clusters described by one index byte
  localparam int GRP_W     = 8 + GRP_CL * CL_DATA_W;  // 56-bit group
  localparam int PSUM_W    = 32;  // result width in the vector unit (assumed)

  // Cluster encoding (2-bit index)
  typedef enum logic [1:0] {
    ENC_ALL2  = 2'b00,  // three 2-bit values
    ENC_ZERO0 = 2'b01,  // first value zero, other two 3-bit
    ENC_ZERO1 = 2'b10,  // second value zero
    ENC_ZERO2 = 2'b11   // third value zero
  } cluster_enc_e;

  // Decoded weight, sign-magnitude
  typedef struct packed {
    logic             sign;
    logic [MAG_W-1:0] mag;
  } wq_t;

  // Activation function applied by the vector unit
  typedef enum logic [0:0] {
    ACT_NONE = 1'b0,
    ACT_RELU = 1'b1
  } act_e;

endpackage

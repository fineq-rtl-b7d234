// decoder_unit: N_DEC parallel cluster decoders fed from one packed weight word.
//
// Packed weights come in 56-bit groups: one index byte followed by 48 data
// bits. The index byte holds four 2-bit encodings; encoding i (bits 2i+1:2i)
// applies to the two adjacent clusters 2i and 2i+1, because the offline
// quantizer forces neighbouring clusters to share an encoding. Cluster c of a
// group uses data bits 6c+5:6c of the 48. The input word holds N_DEC/8 groups,
// group g at bits 56g+55:56g, so N_DEC = 64 decoders take a 448-bit word
// (seven 64-bit words) and yield 192 weights per clock. Weight 3c+j of the
// output is value j of cluster c. The packing order is this design's choice;
// the group format (one index byte per eight clusters) follows the source.
//
// Timing: one clock from in_valid to out_valid, fully pipelined.
module decoder_unit
  import fineq_pkg::*;
#(
  parameter int N_DEC = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [N_DEC/GRP_CL*GRP_W-1:0] in_word,
  output logic                          out_valid,
  output wq_t                           w [N_DEC*CLUSTER]
);

  initial assert (N_DEC % GRP_CL == 0) else $fatal(1, "N_DEC must be a multiple of 8");

  logic [N_DEC-1:0] dv;

  for (genvar c = 0; c < N_DEC; c++) begin : g_dec
    localparam int G = c / GRP_CL;   // group
    localparam int L = c % GRP_CL;   // cluster inside the group
    logic [GRP_W-1:0]     grp;
    logic [CL_DATA_W-1:0] cdata;
    cluster_enc_e         cidx;
    wq_t                  cw [CLUSTER];
    assign grp   = in_word[G*GRP_W +: GRP_W];
    assign cdata = grp[8 + L*CL_DATA_W +: CL_DATA_W];
    assign cidx  = cluster_enc_e'(grp[2*(L/2) +: 2]);
    cluster_decoder u_dec (
      .clk, .rst_n, .in_valid,
      .data(cdata), .index(cidx),
      .out_valid(dv[c]), .w(cw)
    );
    for (genvar j = 0; j < CLUSTER; j++) begin : g_w
      assign w[CLUSTER*c + j] = cw[j];
    end
  end

  assign out_valid = dv[0];

endmodule

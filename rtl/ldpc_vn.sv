// ldpc_vn: variable-node block for code bit V.
//
// Holds one PU per check node that column V of H connects to (DEG of them,
// derived from the base matrix) and the multi-operand adder. In the CN stage
// each PU sends its sign-magnitude message q to its CN; in the VN stage the
// adder sums the channel LLR of the VN-stage codeword with the DEG CN-to-VN
// messages into the intrinsic LLR l_out, which is fed back to the PUs and
// leaves the block towards the ET unit and the output memory.
//
// The channel LLR reaches the block twice, once per stage, because the two
// stages serve different codewords in the same cycle (llr_cn_i, llr_vn_i).
// A block whose column is removed at the selected rate (active_i = 0) keeps
// its registers still, sends the neutral message (+63, which never lowers a
// CN minimum) and reports l_out = 0. Each PU gets the weight of its own edge
// from ldpc_pkg::alpha_of.
module ldpc_vn
  import ldpc_pkg::*;
#(
  parameter int unsigned V   = 0,                   // code bit (column)
  parameter int unsigned DEG = col_deg(V)           // CN connections
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    active_i,   // column used at the selected rate
  input  logic    en_r1_i,
  input  logic    en_r2_i,
  input  logic    sel_llr_i,
  input  llr_t    llr_cn_i,   // channel LLR, CN-stage codeword
  input  llr_t    llr_vn_i,   // channel LLR, VN-stage codeword
  output sm_t     q_o  [DEG], // to the CNs
  input  cn_msg_t cn_i [DEG], // from the CNs
  output sum_t    lout_o      // intrinsic LLR, VN-stage codeword
);

  sm_t  q    [DEG];
  llr_t c2v  [DEG];
  sum_t lout;

  for (genvar j = 0; j < int'(DEG); j++) begin : g_pu
    ldpc_pu #(
      .ALPHA(alpha_of(V, j))
    ) u_pu (
      .clk_i    (clk_i),
      .rst_ni   (rst_ni),
      .en_r1_i  (en_r1_i & active_i),
      .en_r2_i  (en_r2_i & active_i),
      .sel_llr_i(sel_llr_i),
      .llr_i    (llr_cn_i),
      .q_o      (q[j]),
      .cn_i     (cn_i[j]),
      .lout_i   (lout),
      .c2v_o    (c2v[j])
    );
    assign q_o[j] = active_i ? q[j] : SM_NEUTRAL;
  end

  ldpc_vn_adder #(.DEG(DEG)) u_add (
    .llr_i (llr_vn_i),
    .c2v_i (c2v),
    .lout_o(lout)
  );

  assign lout_o = active_i ? lout : '0;

endmodule

// ldpc_pu: processing unit for one VN-CN edge.
//
// Each VN block holds one PU per check node it connects to. The PU carries
// the two pipeline registers that let two independent codewords share the
// decoder (pipeline interleaving):
//
//   CN stage (codeword A):  R1 or channel LLR -> MUX1 -> SM -> q to the CN;
//                           the CN answer (sign XOR, min1, min2) comes back;
//                           "=" compares q's magnitude with min1, MUX2 picks
//                           min2 on a match and min1 otherwise; the sign is
//                           q's sign XOR the CN's sign XOR; the magnitude is
//                           multiplied by the constant edge weight ALPHA;
//                           the sign-magnitude result is captured in R2.
//   VN stage (codeword B):  R2 -> 2C -> to the VN's multi-operand adder; the
//                           adder's intrinsic LLR minus this edge's own
//                           message gives the extrinsic message, captured
//                           (saturated to 7 bits) in R1.
//
// Both stages run in the same clock cycle on different codewords, so R1 and
// R2 each alternate between the two codewords. MUX1 selects the channel LLR
// in the first iteration (sel_llr_i, driven by the iteration counter) and R1
// afterwards. en_r1_i / en_r2_i are the register enables the controller
// drops to freeze a terminated or idle codeword's stage.
//
// From the paper: the datapath order and the blocks above (Fig. 8), 7-bit
// messages, constant-weight scaling. This design's choices: ALPHA is a 4-bit
// fraction (ALPHA/16) with truncation, the extrinsic message saturates to 7
// bits, and both registers reset to zero.
module ldpc_pu
  import ldpc_pkg::*;
#(
  parameter int unsigned ALPHA = ALPHA_DEFAULT  // edge weight, ALPHA/16
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  logic    en_r1_i,    // capture extrinsic message (VN stage)
  input  logic    en_r2_i,    // capture CN-to-VN message (CN stage)
  input  logic    sel_llr_i,  // MUX1: 1 = channel LLR (first iteration)
  input  llr_t    llr_i,      // channel LLR of the CN-stage codeword
  output sm_t     q_o,        // VN-to-CN message to the CN
  input  cn_msg_t cn_i,       // CN answer
  input  sum_t    lout_i,     // intrinsic LLR of the VN-stage codeword
  output llr_t    c2v_o       // CN-to-VN message (2C) to the adder
);

  llr_t r1_q, r1_d, v2c;
  sm_t  r2_q, r2_d;
  mag_t mag_sel;
  logic [MAG_W+ALPHA_W-1:0] prod;

  // ---- CN stage
  assign v2c = sel_llr_i ? llr_i : r1_q;           // MUX1

  ldpc_sm u_sm (.x_i(v2c), .q_o(q_o));             // SM

  always_comb begin
    mag_sel   = (q_o.mag == cn_i.min1) ? cn_i.min2 : cn_i.min1;  // "=" + MUX2
    prod      = mag_sel * ALPHA_W'(ALPHA);                       // x alpha
    r2_d.mag  = mag_t'(prod >> ALPHA_FRAC);
    r2_d.sign = q_o.sign ^ cn_i.sign;                            // XOR
  end

  // ---- VN stage
  ldpc_tc u_tc (.q_i(r2_q), .x_o(c2v_o));          // 2C

  always_comb r1_d = sat_llr(int'(lout_i) - int'(c2v_o));   // +/-

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r1_q <= '0;
      r2_q <= '0;
    end else begin
      if (en_r1_i) r1_q <= r1_d;
      if (en_r2_i) r2_q <= r2_d;
    end
  end

endmodule

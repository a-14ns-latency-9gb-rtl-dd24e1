// ldpc_decoder: fully parallel, pipeline-interleaved min-sum decoder for the
// rate-compatible short-blocklength QC-LDPC code (n = 160/224/288, n' =
// 128/192/256, k = 64/128/192).
//
// Structure: one VN block per code bit (288) and one CN block per parity
// check (96), hard-wired by the parity-check matrix in ldpc_pkg (976 edges,
// one PU each; VN v's j-th connection is port vn_port(v, j) of CN vn_cn(v, j)). Every iteration is done in full in two cycles: the CN stage
// (R1 -> SM -> CN min1/min2/sign -> select, scale -> R2) and the VN stage
// (R2 -> 2C -> multi-operand adder -> extrinsic -> R1). Two codewords are
// interleaved: while one is in the CN stage the other is in the VN stage,
// so both stages are busy every cycle. The ET unit checks the sign bits of
// the VN-stage codeword's intrinsic LLRs against all 96 checks each cycle.
//
// Rates: rate_i removes the first 0, 64 or 128 columns (rate 3/4, 2/3, 1/2).
// The VN blocks of removed columns are idle and send a neutral message.
// rate_i and et_en_i are expected to stay constant while a slot is busy.
//
// Interface (this design's choice; the paper does not describe the chip's
// I/O): in_valid_i/in_ready_o load the n' received LLRs of one codeword into
// input-memory slot in_slot_i, which starts its decoding; a slot is ready
// when it is idle or when its codeword terminates in this cycle (the new
// LLRs replace the old ones at the same clock edge). out_valid_o pulses when a codeword has terminated and its
// 288 soft outputs are in out_llr_o[out_slot_o], where they stay until that
// slot's next result. Timing: a codeword loaded in cycle t starts its first
// CN stage in cycle t+1 or t+2 (its slot's phase) and, without ET, its
// result is valid 2*IMAX + 1 cycles after that, i.e. 2*IMAX cycles of
// decoding. Reloading each slot as it terminates keeps both slots full,
// giving two codewords per 2*IMAX cycles.
module ldpc_decoder
  import ldpc_pkg::*;
#(
  parameter int unsigned IMAX = IMAX_DEFAULT,
  localparam int unsigned IT_W = $clog2(IMAX + 1)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  rate_e           rate_i,
  input  logic            et_en_i,
  // codeword input
  input  logic            in_valid_i,
  input  logic            in_slot_i,
  input  llr_t            in_llr_i [NP_MAX],
  output logic            in_ready_o,
  // status and result
  output logic [1:0]      busy_o,
  output logic            out_valid_o,
  output logic            out_slot_o,
  output logic [IT_W-1:0] out_iters_o,
  output logic            out_et_o,
  output llr_t            out_llr_o [2][N],
  output logic [M-1:0]     et_syndrome_o   // ET check results, VN-stage word
);

  // ------------------------------------------------------------ control
  logic         load;
  logic         cn_slot, vn_slot, sel_llr, en_r1, en_r2, om_we, et_valid;
  logic [1:0]   busy, free;
  logic [N-1:0] active, hard;
  llr_t         im_llr [2][N];
  sum_t         lout [N];

  assign in_ready_o = free[in_slot_i];
  assign load       = in_valid_i & in_ready_o;
  assign busy_o     = busy;

  always_comb
    for (int v = 0; v < int'(N); v++) active[v] = (v >= int'(rate_offset(rate_i)));

  ldpc_ctrl #(.IMAX(IMAX)) u_ctrl (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .start_i     (load),
    .start_slot_i(in_slot_i),
    .et_en_i     (et_en_i),
    .et_valid_i  (et_valid),
    .cn_slot_o   (cn_slot),
    .vn_slot_o   (vn_slot),
    .sel_llr_o   (sel_llr),
    .en_r1_o     (en_r1),
    .en_r2_o     (en_r2),
    .om_we_o     (om_we),
    .busy_o      (busy),
    .free_o      (free),
    .done_o      (out_valid_o),
    .done_slot_o (out_slot_o),
    .done_iters_o(out_iters_o),
    .done_et_o   (out_et_o)
  );

  // ------------------------------------------------------------ memories
  ldpc_im u_im (
    .clk_i (clk_i),
    .rst_ni(rst_ni),
    .we_i  (load),
    .slot_i(in_slot_i),
    .rate_i(rate_i),
    .llr_i (in_llr_i),
    .llr_o (im_llr)
  );

  ldpc_om u_om (
    .clk_i (clk_i),
    .rst_ni(rst_ni),
    .we_i  (om_we),
    .slot_i(vn_slot),
    .lout_i(lout),
    .llr_o (out_llr_o)
  );

  // ------------------------------------------------------------ VN / CN array
  // v2c[m][p]: message on port p of CN m; ports beyond the CN's degree are
  // tied to the neutral message and not read.
  sm_t     v2c [M][DC_MAX];
  cn_msg_t c2v [M];          // per CN, broadcast to its VNs

  for (genvar v = 0; v < int'(N); v++) begin : g_vn
    localparam int unsigned DEG = col_deg(v);
    sm_t     q  [DEG];
    cn_msg_t cn [DEG];
    for (genvar j = 0; j < int'(DEG); j++) begin : g_e
      assign v2c[vn_cn(v, j)][vn_port(v, j)] = q[j];
      assign cn[j]                           = c2v[vn_cn(v, j)];
    end
    ldpc_vn #(.V(v), .DEG(DEG)) u_vn (
      .clk_i    (clk_i),
      .rst_ni   (rst_ni),
      .active_i (active[v]),
      .en_r1_i  (en_r1),
      .en_r2_i  (en_r2),
      .sel_llr_i(sel_llr),
      .llr_cn_i (im_llr[cn_slot][v]),
      .llr_vn_i (im_llr[vn_slot][v]),
      .q_o      (q),
      .cn_i     (cn),
      .lout_o   (lout[v])
    );
    assign hard[v] = lout[v][SUM_W-1];
  end

  for (genvar m = 0; m < int'(M); m++) begin : g_cn
    localparam int unsigned DEG = row_deg(m);
    sm_t q [DEG];
    for (genvar p = 0; p < DC_MAX; p++) begin : g_p
      if (p < int'(DEG)) begin : g_used
        assign q[p] = v2c[m][p];
      end else begin : g_unused
        assign v2c[m][p] = SM_NEUTRAL;
      end
    end
    ldpc_cn #(.DEG(DEG)) u_cn (
      .q_i (q),
      .cn_o(c2v[m])
    );
  end

  // ------------------------------------------------------------ early termination
  ldpc_et u_et (
    .hard_i    (hard),
    .active_i  (active),
    .syndrome_o(et_syndrome_o),
    .valid_o   (et_valid)
  );

endmodule

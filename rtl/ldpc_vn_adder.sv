// ldpc_vn_adder: multi-operand adder of a variable node.
//
// Adds the channel LLR of the codeword in the VN-update stage and the DEG
// CN-to-VN messages (7-bit two's complement each) into the intrinsic LLR
// l_out. Following the paper, the result has one more integer bit than a
// message (8 bits). The sum is formed at full width and then saturated to
// 8 bits; saturation rather than wrap-around is this design's choice.
// Purely combinational.
module ldpc_vn_adder
  import ldpc_pkg::*;
#(
  parameter int unsigned DEG = 4      // CN connections of the VN
) (
  input  llr_t llr_i,                 // channel LLR
  input  llr_t c2v_i [DEG],           // CN-to-VN messages
  output sum_t lout_o                 // intrinsic LLR, saturated
);

  localparam int unsigned ACC_W = SUM_W + $clog2(DEG + 1);
  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t acc;

  always_comb begin
    acc = acc_t'(llr_i);
    for (int j = 0; j < int'(DEG); j++) acc += acc_t'(c2v_i[j]);
    if (acc > acc_t'(SUM_MAX))
      lout_o = sum_t'(SUM_MAX);
    else if (acc < acc_t'(SUM_MIN))
      lout_o = sum_t'(SUM_MIN);
    else
      lout_o = sum_t'(acc);
  end

endmodule

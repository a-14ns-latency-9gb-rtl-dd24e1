// ldpc_tc: sign-magnitude to two's complement converter ("2C" in the PU).
//
// Turns the scaled CN-to-VN message held in R2 back into 7-bit two's
// complement so the VN's multi-operand adder can sum it. A magnitude of at
// most 63 always fits; a negative zero becomes zero. Purely combinational.
module ldpc_tc
  import ldpc_pkg::*;
(
  input  sm_t  q_i,   // sign-magnitude message
  output llr_t x_o    // two's complement message
);

  always_comb begin
    if (q_i.sign)
      x_o = -llr_t'({1'b0, q_i.mag});
    else
      x_o = llr_t'({1'b0, q_i.mag});
  end

endmodule

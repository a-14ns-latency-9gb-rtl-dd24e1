// ldpc_sm: two's complement to sign-magnitude converter ("SM" in the PU).
//
// Converts a 7-bit two's complement VN-to-CN message into the sign-magnitude
// form the check nodes work on: the sign is the MSB, the magnitude the
// absolute value. The one value with no 6-bit magnitude, -64, saturates to
// magnitude 63 (a choice of this design; the paper only names the block).
// Purely combinational.
module ldpc_sm
  import ldpc_pkg::*;
(
  input  llr_t x_i,   // two's complement message
  output sm_t  q_o    // sign-magnitude message
);

  always_comb begin
    q_o.sign = x_i[LLR_W-1];
    if (x_i == llr_t'(LLR_MIN))
      q_o.mag = mag_t'(MAG_MAX);
    else if (x_i[LLR_W-1])
      q_o.mag = mag_t'(-x_i);
    else
      q_o.mag = mag_t'(x_i);
  end

endmodule

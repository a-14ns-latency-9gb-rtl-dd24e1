// tb_ldpc_sm: exhaustive test of the two's complement to sign-magnitude
// converter. Every 7-bit input is applied; the expected sign is "input is
// negative" and the expected magnitude |x| limited to 63.
module tb_ldpc_sm;
  import ldpc_pkg::*;
  llr_t x;
  sm_t  q;
  int checks = 0, failures = 0;

  ldpc_sm dut (.x_i(x), .q_o(q));

  initial begin
    for (int i = -64; i < 64; i++) begin
      int exp_mag;
      x = llr_t'(i);
      #1;
      exp_mag = (i < 0) ? ((-i > 63) ? 63 : -i) : i;
      checks++;
      if (q.sign !== (i < 0) || int'(q.mag) != exp_mag) begin
        failures++;
        $display("FAIL x=%0d got sign=%0b mag=%0d", i, q.sign, q.mag);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ldpc_cn: random test of the check node at degree 14 and degree 3 (the
// largest and a small degree of the code). Expected minima are found by
// sorting the magnitudes; the expected sign is the XOR of all signs. Ties
// (equal magnitudes) are forced often by drawing from a small range.
module tb_ldpc_cn;
  import ldpc_pkg::*;
  sm_t     qa [14];
  sm_t     qb [3];
  cn_msg_t ca, cb;
  int checks = 0, failures = 0;

  ldpc_cn #(.DEG(14)) dut_a (.q_i(qa), .cn_o(ca));
  ldpc_cn #(.DEG(3))  dut_b (.q_i(qb), .cn_o(cb));

  task automatic expect_cn(input int mags[$], input bit sgn, input cn_msg_t got, input string tag);
    int s[$] = mags;
    s.sort();
    checks++;
    if (got.sign !== sgn || int'(got.min1) != s[0] || int'(got.min2) != s[1]) begin
      failures++;
      $display("FAIL %s exp sign=%0b min1=%0d min2=%0d got %0b %0d %0d",
               tag, sgn, s[0], s[1], got.sign, got.min1, got.min2);
    end
  endtask

  initial begin
    for (int k = 0; k < 2000; k++) begin
      automatic int ma[$], mb[$];
      automatic bit sa = 0, sb = 0;
      automatic int hi = (k % 2) ? 63 : 7;
      for (int j = 0; j < 14; j++) begin
        qa[j].mag  = mag_t'($urandom_range(hi, 0));
        qa[j].sign = 1'($urandom);
        ma.push_back(int'(qa[j].mag));
        sa ^= qa[j].sign;
      end
      for (int j = 0; j < 3; j++) begin
        qb[j].mag  = mag_t'($urandom_range(hi, 0));
        qb[j].sign = 1'($urandom);
        mb.push_back(int'(qb[j].mag));
        sb ^= qb[j].sign;
      end
      #1;
      expect_cn(ma, sa, ca, "deg14");
      expect_cn(mb, sb, cb, "deg3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

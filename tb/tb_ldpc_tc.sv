// tb_ldpc_tc: exhaustive test of the sign-magnitude to two's complement
// converter: all 128 (sign, magnitude) pairs against (sign ? -mag : mag).
module tb_ldpc_tc;
  import ldpc_pkg::*;
  sm_t  q;
  llr_t x;
  int checks = 0, failures = 0;

  ldpc_tc dut (.q_i(q), .x_o(x));

  initial begin
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < 64; m++) begin
        q.sign = 1'(s);
        q.mag  = mag_t'(m);
        #1;
        checks++;
        if (int'(x) != (s ? -m : m)) begin
          failures++;
          $display("FAIL sign=%0d mag=%0d got %0d", s, m, x);
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

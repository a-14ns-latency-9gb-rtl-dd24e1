// tb_ldpc_vn_adder: random and corner-case test of the VN multi-operand
// adder with 6 CN inputs (the largest VN degree of the code). The expected
// value is the integer sum clamped to the 8-bit range [-128, 127].
module tb_ldpc_vn_adder;
  import ldpc_pkg::*;
  localparam int DEG = 6;
  llr_t llr;
  llr_t c2v [DEG];
  sum_t lout;
  int checks = 0, failures = 0;
  int n_sat = 0;

  ldpc_vn_adder #(.DEG(DEG)) dut (.llr_i(llr), .c2v_i(c2v), .lout_o(lout));

  task automatic check();
    int s = int'(llr);
    int e;
    for (int j = 0; j < DEG; j++) s += int'(c2v[j]);
    e = (s > 127) ? 127 : (s < -128) ? -128 : s;
    if (e != s) n_sat++;
    #1;
    checks++;
    if (int'(lout) != e) begin
      failures++;
      $display("FAIL sum=%0d got %0d", s, lout);
    end
  endtask

  initial begin
    for (int k = 0; k < 3000; k++) begin
      automatic int range = (k % 3 == 0) ? 128 : 24;   // mix of saturating and small sums
      llr = llr_t'($urandom_range(range - 1, 0) - range / 2);
      for (int j = 0; j < DEG; j++) c2v[j] = llr_t'($urandom_range(range - 1, 0) - range / 2);
      #1 check();
    end
    llr = llr_t'(-64); for (int j = 0; j < DEG; j++) c2v[j] = llr_t'(-64); #1 check();
    llr = llr_t'(63);  for (int j = 0; j < DEG; j++) c2v[j] = llr_t'(63);  #1 check();
    if (n_sat == 0) begin failures++; $display("FAIL saturation never exercised"); end
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

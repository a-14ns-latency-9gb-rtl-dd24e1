// tb_ldpc_pu: cycle-level test of the processing unit against an integer
// model of the edge arithmetic. Random register enables, MUX1 selections,
// channel LLRs, intrinsic LLRs and CN answers are applied; half of the CN
// answers use the PU's own magnitude as min1 so that the "=" / MUX2 path
// (second minimum) is taken. Checked every cycle: the message q sent to the
// CN and the two's complement CN-to-VN message out of R2.
module tb_ldpc_pu;
  import ldpc_pkg::*;
  localparam int ALPHA = 12;
  logic    clk = 0, rst_n = 0;
  logic    en_r1, en_r2, sel_llr;
  llr_t    llr;
  sm_t     q;
  cn_msg_t cn;
  sum_t    lout;
  llr_t    c2v;
  int checks = 0, failures = 0, n_min2 = 0, n_hold = 0;
  int r1_m = 0, r2_m = 0;   // model registers (two's complement values)

  ldpc_pu #(.ALPHA(ALPHA)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_r1_i(en_r1), .en_r2_i(en_r2), .sel_llr_i(sel_llr),
    .llr_i(llr), .q_o(q), .cn_i(cn), .lout_i(lout), .c2v_o(c2v));

  always #5 clk = ~clk;

  function automatic int sat(int x, int lo, int hi);
    return (x < lo) ? lo : (x > hi) ? hi : x;
  endfunction

  initial begin
    en_r1 = 0; en_r2 = 0; sel_llr = 1; llr = '0; cn = '0; lout = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4000; k++) begin
      int v2c, qmag, min1, min2, sel, mag, nr1, nr2;
      bit qs, s;
      @(negedge clk);
      en_r1   = 1'($urandom_range(3, 0) != 0);
      en_r2   = 1'($urandom_range(3, 0) != 0);
      sel_llr = 1'($urandom_range(3, 0) == 0);
      llr     = llr_t'($urandom_range(127, 0) - 64);
      lout    = sum_t'($urandom_range(255, 0) - 128);
      v2c  = sel_llr ? int'(llr) : r1_m;
      qs   = (v2c < 0);
      qmag = sat(qs ? -v2c : v2c, 0, 63);
      if ($urandom_range(1, 0)) begin
        min1 = qmag;
        min2 = $urandom_range(63, qmag);
      end else begin
        min1 = $urandom_range(63, 0);
        min2 = $urandom_range(63, min1);
      end
      cn.sign = 1'($urandom);
      cn.min1 = mag_t'(min1);
      cn.min2 = mag_t'(min2);
      #1;
      // combinational outputs
      checks++;
      if (q.sign !== qs || int'(q.mag) != qmag) begin
        failures++; $display("FAIL q exp %0b/%0d got %0b/%0d", qs, qmag, q.sign, q.mag);
      end
      checks++;
      if (int'(c2v) != r2_m) begin
        failures++; $display("FAIL c2v exp %0d got %0d", r2_m, c2v);
      end
      // model update
      sel = (qmag == min1) ? min2 : min1;
      if (qmag == min1 && min1 != min2) n_min2++;
      mag = (sel * ALPHA) / 16;
      s   = qs ^ cn.sign;
      nr2 = s ? -mag : mag;
      nr1 = sat(int'(lout) - r2_m, -64, 63);
      if (!en_r1 || !en_r2) n_hold++;
      @(posedge clk);
      if (en_r2) r2_m = nr2;
      if (en_r1) r1_m = nr1;
    end
    if (n_min2 == 0 || n_hold == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

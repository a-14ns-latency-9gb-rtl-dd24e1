// tb_ldpc_vn: cycle-level test of a complete VN block (column 192, the
// first column of base column 24, which has the largest degree, 6).
// Drives a two-stage schedule like the decoder's and checks against an
// integer model of the DEG edges: the messages q sent to the CNs, the
// intrinsic LLR l_out (channel LLR + CN messages, saturated to 8 bits), the
// neutral message and zero output of an inactive block, and that an
// inactive block's registers stay still.
module tb_ldpc_vn;
  import ldpc_pkg::*;
  localparam int V   = 192;
  localparam int DEG = col_deg(V);
  logic    clk = 0, rst_n = 0;
  logic    active, en_r1, en_r2, sel_llr;
  llr_t    llr_cn, llr_vn;
  sm_t     q  [DEG];
  cn_msg_t cn [DEG];
  sum_t    lout;
  int checks = 0, failures = 0, n_inactive = 0;
  int r1_m [DEG], r2_m [DEG];

  ldpc_vn #(.V(V)) dut (
    .clk_i(clk), .rst_ni(rst_n), .active_i(active), .en_r1_i(en_r1), .en_r2_i(en_r2),
    .sel_llr_i(sel_llr), .llr_cn_i(llr_cn), .llr_vn_i(llr_vn), .q_o(q), .cn_i(cn),
    .lout_o(lout));

  always #5 clk = ~clk;

  function automatic int sat(int x, int lo, int hi);
    return (x < lo) ? lo : (x > hi) ? hi : x;
  endfunction

  initial begin
    if (DEG != 6) begin failures++; $display("FAIL degree %0d", DEG); end
    foreach (r1_m[j]) begin r1_m[j] = 0; r2_m[j] = 0; end
    active = 1; en_r1 = 0; en_r2 = 0; sel_llr = 1; llr_cn = '0; llr_vn = '0;
    foreach (cn[j]) cn[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int exp_lout, sum;
      int nr1 [DEG], nr2 [DEG];
      @(negedge clk);
      active  = 1'($urandom_range(7, 0) != 0);
      en_r1   = 1'($urandom);
      en_r2   = 1'($urandom);
      sel_llr = 1'($urandom_range(3, 0) == 0);
      llr_cn  = llr_t'($urandom_range(127, 0) - 64);
      llr_vn  = llr_t'($urandom_range(127, 0) - 64);
      foreach (cn[j]) begin
        automatic int a = $urandom_range(40, 0);
        cn[j].sign = 1'($urandom);
        cn[j].min1 = mag_t'(a);
        cn[j].min2 = mag_t'($urandom_range(63, a));
      end
      #1;
      sum = int'(llr_vn);
      foreach (r2_m[j]) sum += r2_m[j];
      exp_lout = active ? sat(sum, -128, 127) : 0;
      checks++;
      if (int'(lout) != exp_lout) begin
        failures++; $display("FAIL lout exp %0d got %0d", exp_lout, lout);
      end
      for (int j = 0; j < DEG; j++) begin
        automatic int v2c = sel_llr ? int'(llr_cn) : r1_m[j];
        automatic bit qs = (v2c < 0);
        automatic int qm = sat(qs ? -v2c : v2c, 0, 63);
        int sel, mg;
        checks++;
        if (!active) begin
          if (q[j] !== SM_NEUTRAL) begin failures++; $display("FAIL neutral"); end
        end else if (q[j].sign !== qs || int'(q[j].mag) != qm) begin
          failures++; $display("FAIL q[%0d] exp %0b/%0d got %0b/%0d", j, qs, qm, q[j].sign, q[j].mag);
        end
        sel = (qm == int'(cn[j].min1)) ? int'(cn[j].min2) : int'(cn[j].min1);
        mg  = (sel * alpha_of(V, j)) / 16;
        nr2[j] = (qs ^ cn[j].sign) ? -mg : mg;
        nr1[j] = sat(sat(sum, -128, 127) - r2_m[j], -64, 63);
      end
      if (!active) n_inactive++;
      @(posedge clk);
      for (int j = 0; j < DEG; j++) begin
        if (active && en_r2) r2_m[j] = nr2[j];
        if (active && en_r1) r1_m[j] = nr1[j];
      end
    end
    if (n_inactive == 0) begin failures++; $display("FAIL inactive never tested"); end
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

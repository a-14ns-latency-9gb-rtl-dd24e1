// tb_ldpc_decoder: end-to-end, full-size testbench of the decoder top level
// at its default parameters (96 x 288 code, 10 iterations).
//
// Random codewords of all three rates are sent over a BPSK/AWGN channel at
// several noise levels and streamed into both codeword slots as soon as a
// slot is free, with early termination switched on and off. Every result is
// compared bit-exactly with the golden min-sum model of ldpc_ref_pkg
// (intrinsic LLRs saturated to 7 bits, iteration count, early-termination
// flag) and the latency from load to result is checked
// against two cycles per iteration. A final back-to-back run reloads each
// slot in the cycle its codeword terminates and checks that each slot then
// delivers a result every 2*IMAX cycles, i.e. two codewords per 2*IMAX
// cycles with no bubble. The testbench counts how often each
// mechanism occurred and fails if one of them was never exercised.
module tb_ldpc_decoder;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int FRAMES_PER_CFG = 10;
  localparam int NCFG           = 6;     // 3 rates x ET off/on
  localparam int B2B_FRAMES     = 16;    // back-to-back throughput run

  logic  clk = 0;
  logic  rst_n = 0;
  rate_e rate;
  logic  et_en;
  logic  in_valid;
  logic  in_slot;
  llr_t  in_llr [NP_MAX];
  logic  in_ready;
  logic  [1:0] busy;
  logic  out_valid;
  logic  out_slot;
  logic  [$clog2(IMAX_DEFAULT+1)-1:0] out_iters;
  logic  out_et;
  llr_t  out_llr [2][N];
  logic  [M-1:0] et_syndrome;

  ldpc_decoder dut (
    .clk_i          (clk),
    .rst_ni         (rst_n),
    .rate_i         (rate),
    .et_en_i        (et_en),
    .in_valid_i     (in_valid),
    .in_slot_i      (in_slot),
    .in_llr_i       (in_llr),
    .in_ready_o     (in_ready),
    .busy_o         (busy),
    .out_valid_o    (out_valid),
    .out_slot_o     (out_slot),
    .out_iters_o    (out_iters),
    .out_et_o       (out_et),
    .out_llr_o      (out_llr),
    .et_syndrome_o  (et_syndrome)
  );

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    #50_000_000;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle);
    end
  endtask

  hmat_t h;

  // per-slot queue of loaded codewords (a slot may be reloaded in the same
  // cycle in which its previous result is presented)
  typedef struct {
    ivec_t llr;
    hrow_t cw;
    int    start;
  } job_t;
  job_t jobs [2][$];

  // mechanism counters
  int n_done = 0, n_et = 0, n_limit = 0, n_corrected = 0, n_failed_dec = 0;
  int n_both_busy = 0, n_one_busy = 0, n_removed_ok = 0, n_sat = 0;
  int n_reload = 0, n_b2b = 0;
  int n_rate [3];
  int n_slot [2];

  always @(posedge clk) if (rst_n) begin
    if (busy == 2'b11) n_both_busy++;
    if (busy == 2'b01 || busy == 2'b10) n_one_busy++;
  end

  // result checker
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int    s = out_slot;
    automatic ivec_t gl;
    automatic int    git;
    automatic bit    get;
    automatic hrow_t act = active_mask(rate);
    automatic hrow_t hard = '0;
    automatic job_t  j;
    automatic int    lat;
    automatic bit    lout_ok = 1;
    automatic bit    rem_ok = 1;
    check(jobs[s].size() > 0, "result for a slot that was never loaded");
    j   = jobs[s].pop_front();
    lat = cycle - j.start;
    golden_decode(h, j.llr, act, et_en, IMAX_DEFAULT, ALPHA_DEFAULT, gl, git, get);
    for (int v = 0; v < int'(N); v++) begin
      automatic int exp = clamp(gl[v], LLR_MIN, LLR_MAX);
      if (int'(out_llr[s][v]) != exp) begin
        if (lout_ok) $display("  slot %0d col %0d got %0d exp %0d", s, v, out_llr[s][v], exp);
        lout_ok = 0;
      end
      if (!act[v] && out_llr[s][v] != 0) rem_ok = 0;
      if (gl[v] > LLR_MAX || gl[v] < LLR_MIN) n_sat++;
      hard[v] = act[v] && (gl[v] < 0);
    end
    check(lout_ok, "output LLRs differ from golden model");
    check(rem_ok,  "removed columns not zero");
    check(int'(out_iters) == git, $sformatf("iterations got %0d exp %0d", out_iters, git));
    check(out_et == get, $sformatf("ET flag got %0d exp %0d", out_et, get));
    check(lat == 2*git + 1 || lat == 2*git + 2,
          $sformatf("latency %0d cycles for %0d iterations", lat, git));
    if (out_et) check(syndrome(h, hard) == '0, "ET reported with nonzero syndrome");
    if (!act[0]) n_removed_ok += rem_ok;
    n_done++;
    n_slot[s]++;
    if (!gaps) out_times[s].push_back(cycle);
    n_rate[int'(rate)]++;
    if (out_et) n_et++; else n_limit++;
    if (hard == j.cw) begin
      automatic hrow_t chard = '0;
      for (int v = 0; v < int'(N); v++) chard[v] = act[v] && (j.llr[v] < 0);
      if (chard != j.cw) n_corrected++;
    end else n_failed_dec++;
  end

  // load one codeword into a free slot
  bit gaps = 1;
  int out_times [2][$];

  task automatic load(rate_e r, real sigma);
    automatic hrow_t cw  = random_codeword(h, r);
    automatic ivec_t col;
    automatic int    off = rate_offset(r);
    automatic int    np  = rate_nprime(r);
    automatic int    s;
    check(syndrome(h, cw) == '0, "reference codeword invalid");
    for (int v = 0; v < int'(N); v++) col[v] = 0;
    for (int i = 0; i < int'(NP_MAX); i++) in_llr[i] = '0;
    for (int i = 0; i < np; i++) begin
      automatic int c = tx_column(r, i);
      automatic int l = channel_llr(cw[c], sigma);
      in_llr[i] = llr_t'(l);
      col[c]    = l;
    end
    // wait for a free slot (idle, or terminating in this cycle), trying
    // the two slots in random order
    forever begin
      automatic int first = $urandom_range(1, 0);
      s = -1;
      for (int t = 0; t < 2 && s < 0; t++) begin
        in_slot = 1'(first ^ t);
        #1;
        if (in_ready) s = first ^ t;
      end
      if (s >= 0) break;
      @(negedge clk);
    end
    if (busy[s]) n_reload++;
    in_valid = 1;
    jobs[s].push_back('{llr: col, cw: cw, start: cycle});
    @(posedge clk);
    @(negedge clk);
    in_valid = 0;
    // random gap, sometimes long enough for the other slot to run alone
    if (gaps) repeat ($urandom_range(($urandom_range(3, 0) == 0) ? 30 : 3, 0)) @(negedge clk);
  endtask

  real sigmas [4] = '{0.45, 0.6, 0.75, 0.95};

  initial begin
    h = build_h();
    rate = RATE_3_4;
    et_en = 0;
    in_valid = 0;
    in_slot = 0;
    for (int i = 0; i < int'(NP_MAX); i++) in_llr[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int cfg = 0; cfg < NCFG; cfg++) begin
      // the rate and ET mode are static inputs: change them only when idle
      while (busy != 2'b00 || out_valid) @(negedge clk);
      @(negedge clk);
      rate  = rate_e'(cfg % 3);
      et_en = (cfg >= 3);
      for (int f = 0; f < FRAMES_PER_CFG; f++) load(rate, sigmas[$urandom_range(3, 0)]);
    end
    // back to back at rate 3/4 without ET: with both slots reloaded as they
    // terminate, each slot must deliver a result every 2*IMAX cycles
    while (busy != 2'b00 || out_valid) @(negedge clk);
    @(negedge clk);
    rate  = RATE_3_4;
    et_en = 0;
    gaps  = 0;
    for (int f = 0; f < B2B_FRAMES; f++) load(rate, sigmas[$urandom_range(3, 0)]);
    while (busy != 2'b00) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int sl = 0; sl < 2; sl++)
      for (int i = 1; i < out_times[sl].size(); i++) begin
        check(out_times[sl][i] - out_times[sl][i-1] == 2 * int'(IMAX_DEFAULT),
              $sformatf("back-to-back result spacing %0d cycles in slot %0d",
                        out_times[sl][i] - out_times[sl][i-1], sl));
        n_b2b++;
      end

    $display("frames=%0d et=%0d limit=%0d corrected=%0d undecoded=%0d both_busy=%0d one_busy=%0d",
             n_done, n_et, n_limit, n_corrected, n_failed_dec, n_both_busy, n_one_busy);
    $display("reloads=%0d back_to_back_intervals=%0d", n_reload, n_b2b);
    $display("rate1/2=%0d rate2/3=%0d rate3/4=%0d slot0=%0d slot1=%0d removed_zero=%0d saturated=%0d",
             n_rate[0], n_rate[1], n_rate[2], n_slot[0], n_slot[1], n_removed_ok, n_sat);
    check(n_done == NCFG * FRAMES_PER_CFG + B2B_FRAMES, "not every codeword produced a result");
    check(n_et > 0,         "mechanism never seen: early termination");
    check(n_limit > 0,      "mechanism never seen: iteration limit");
    check(n_corrected > 0,  "mechanism never seen: channel errors corrected");
    check(n_both_busy > 0,  "mechanism never seen: two interleaved codewords");
    check(n_one_busy > 0,   "mechanism never seen: lone codeword");
    check(n_reload > 0,     "mechanism never seen: slot reloaded as it terminates");
    check(n_b2b > 0,        "mechanism never seen: back-to-back decoding");
    check(n_removed_ok > 0, "mechanism never seen: shortened rate with removed columns");
    check(n_sat > 0,        "mechanism never seen: output saturation");
    for (int r = 0; r < 3; r++) check(n_rate[r] > 0, $sformatf("mechanism never seen: rate %0d", r));
    check(n_slot[0] > 0 && n_slot[1] > 0, "mechanism never seen: both slots used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

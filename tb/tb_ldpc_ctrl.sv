// tb_ldpc_ctrl: cycle-level test of the decoder controller (IMAX = 10).
// Codewords are started on random idle slots, and often on a slot in the
// very cycle its codeword terminates; ET "codeword found" is
// raised at random. An independent per-slot model (busy, started, number of
// half-iterations done, phase = cycle parity) gives every cycle the
// expected CN-stage slot, register enables, MUX1 selection and OM write;
// each termination is checked for slot, iteration count and ET flag, and
// for the 2*IMAX-cycle decoding time (first CN stage to done) when ET does
// not fire. Also counted: cycles with both slots interleaved, cycles with a
// lone codeword (frozen registers), terminations by ET and by the limit,
// and reloads of a terminating slot; the free_o flags are checked each cycle.
module tb_ldpc_ctrl;
  import ldpc_pkg::*;
  localparam int IMAX = 10;
  logic clk = 0, rst_n = 0;
  logic start, start_slot, et_en, et_valid;
  logic cn_slot, vn_slot, sel_llr, en_r1, en_r2, om_we, done, done_slot, done_et;
  logic [1:0] busy, free;
  logic [$clog2(IMAX+1)-1:0] done_iters;
  int checks = 0, failures = 0;
  int n_both = 0, n_lone = 0, n_et = 0, n_max = 0, n_lat = 0, n_reload = 0;

  ldpc_ctrl #(.IMAX(IMAX)) dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .start_slot_i(start_slot),
    .et_en_i(et_en), .et_valid_i(et_valid), .cn_slot_o(cn_slot), .vn_slot_o(vn_slot),
    .sel_llr_o(sel_llr), .en_r1_o(en_r1), .en_r2_o(en_r2), .om_we_o(om_we), .busy_o(busy), .free_o(free),
    .done_o(done), .done_slot_o(done_slot), .done_iters_o(done_iters), .done_et_o(done_et));

  always #5 clk = ~clk;

  // model state
  bit m_busy [2], m_started [2];
  int m_half [2], m_first [2];
  bit exp_done; int exp_slot, exp_iters; bit exp_et; int exp_lat_ok;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int cyc = 0;
    start = 0; start_slot = 0; et_en = 0; et_valid = 0;
    m_busy = '{0, 0}; m_started = '{0, 0}; m_half = '{0, 0}; m_first = '{0, 0};
    exp_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (cyc = 0; cyc < 6000; cyc++) begin
      automatic int ph = (cyc + 1) % 2;   // the phase toggled once before cycle 0
      automatic int q = 1 - ph;
      bit vn_act, fin, s1;
      @(negedge clk);
      // stimulus
      et_en    = (cyc / 1000) % 2 == 1;
      et_valid = ($urandom_range(7, 0) == 0);
      vn_act = m_busy[q] && m_started[q];
      fin    = vn_act && ((m_half[q] / 2 + 1 == IMAX) || (et_en && et_valid));
      start  = 0;
      if ($urandom_range(3, 0) == 0) begin
        start_slot = 1'($urandom);
        start = !m_busy[start_slot];
      end
      // reload a slot in the cycle its codeword terminates
      if (fin && $urandom_range(1, 0) == 0) begin
        start_slot = 1'(q);
        start = 1;
        n_reload++;
      end
      #1;
      // expected combinational outputs
      chk(free == {1'(!m_busy[1] || (fin && q == 1)), 1'(!m_busy[0] || (fin && q == 0))}, "free");
      chk(cn_slot == 1'(ph), "cn_slot");
      chk(vn_slot == 1'(q), "vn_slot");
      chk(en_r2 == m_busy[ph], "en_r2");
      chk(en_r1 == (vn_act && !fin), "en_r1");
      chk(om_we == fin, "om_we");
      chk(busy == {1'(m_busy[1]), 1'(m_busy[0])}, "busy");
      if (m_busy[ph]) chk(sel_llr == (m_half[ph] == 0), "sel_llr");
      // done from the previous cycle
      chk(done == exp_done, "done");
      if (exp_done) begin
        chk(int'(done_slot) == exp_slot, "done_slot");
        chk(int'(done_iters) == exp_iters, "done_iters");
        chk(done_et == exp_et, "done_et");
        if (!exp_et) begin
          chk(exp_lat_ok == 2 * IMAX, "latency");
          n_lat++;
        end
      end
      if (m_busy[ph] && vn_act) n_both++;
      if (m_busy[ph] != (m_busy[q] && m_started[q])) n_lone++;
      // model update at the clock edge
      s1 = m_busy[ph];
      exp_done = fin;
      if (fin) begin
        exp_slot   = q;
        exp_iters  = m_half[q] / 2 + 1;
        exp_et     = (m_half[q] / 2 + 1 != IMAX);
        exp_lat_ok = cyc - m_first[q] + 1;
        if (exp_et) n_et++; else n_max++;
        m_busy[q] = 0; m_started[q] = 0; m_half[q] = 0;
      end else if (vn_act) m_half[q]++;
      if (s1) begin
        if (!m_started[ph]) m_first[ph] = cyc;
        m_started[ph] = 1;
        m_half[ph]++;
      end
      if (start) begin
        m_busy[start_slot] = 1; m_started[start_slot] = 0; m_half[start_slot] = 0;
      end
    end
    chk(n_both > 0, "interleaving never seen");
    chk(n_lone > 0, "lone codeword never seen");
    chk(n_et > 0, "ET termination never seen");
    chk(n_reload > 0, "reload of a terminating slot never seen");
    chk(n_max > 0 && n_lat > 0, "limit termination never seen");
    $display("interleaved=%0d lone=%0d et=%0d limit=%0d reload=%0d", n_both, n_lone, n_et, n_max, n_reload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

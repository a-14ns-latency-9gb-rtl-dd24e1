// tb_ldpc_im: test of the input LLR memory. For each rate and slot a random
// vector of received LLRs is written; every column is then compared with
// the placement rule: received LLR i sits in column offset + i below the
// punctured range 128..159 and offset + i + 32 above it; punctured and
// removed columns read zero. The other slot must keep its contents.
module tb_ldpc_im;
  import ldpc_pkg::*;
  logic  clk = 0, rst_n = 0;
  logic  we, slot;
  rate_e rate;
  llr_t  din [NP_MAX];
  llr_t  dout [2][N];
  int checks = 0, failures = 0;
  int exp_mem [2][N];

  ldpc_im dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .slot_i(slot), .rate_i(rate),
               .llr_i(din), .llr_o(dout));

  always #5 clk = ~clk;

  initial begin
    int off, np;
    we = 0; slot = 0; rate = RATE_3_4;
    foreach (din[i]) din[i] = '0;
    foreach (exp_mem[s, v]) exp_mem[s][v] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 12; k++) begin
      @(negedge clk);
      rate = rate_e'(k % 3);
      slot = 1'(k / 3);
      off  = (k % 3 == 0) ? 128 : (k % 3 == 1) ? 64 : 0;
      np   = 288 - off - 32;
      foreach (din[i]) din[i] = llr_t'($urandom_range(127, 0) - 64);
      we = 1;
      for (int v = 0; v < int'(N); v++) begin
        if (v < off || (v >= 128 && v < 160)) exp_mem[slot][v] = 0;
        else if (v < 128) exp_mem[slot][v] = int'(din[v - off]);
        else exp_mem[slot][v] = int'(din[v - off - 32]);
      end
      if (np != int'(rate_nprime(rate))) begin failures++; $display("FAIL n'"); end
      @(negedge clk);
      we = 0;
      foreach (din[i]) din[i] = llr_t'($urandom);   // must not be written
      @(negedge clk);
      for (int s = 0; s < 2; s++)
        for (int v = 0; v < int'(N); v++) begin
          checks++;
          if (int'(dout[s][v]) != exp_mem[s][v]) begin
            failures++;
            if (failures < 10) $display("FAIL slot %0d col %0d exp %0d got %0d", s, v, exp_mem[s][v], dout[s][v]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ldpc_om: test of the output LLR memory: random 8-bit intrinsic LLR
// vectors are written to alternating slots and read back saturated to the
// 7-bit range [-64, 63]; the slot not written must keep its contents.
module tb_ldpc_om;
  import ldpc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we, slot;
  sum_t din [N];
  llr_t dout [2][N];
  int checks = 0, failures = 0, n_sat = 0;
  int exp_mem [2][N];

  ldpc_om dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .slot_i(slot), .lout_i(din), .llr_o(dout));

  always #5 clk = ~clk;

  initial begin
    we = 0; slot = 0;
    foreach (din[i]) din[i] = '0;
    foreach (exp_mem[s, v]) exp_mem[s][v] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 10; k++) begin
      @(negedge clk);
      slot = 1'($urandom);
      we   = 1;
      foreach (din[v]) begin
        automatic int x = $urandom_range(255, 0) - 128;
        din[v] = sum_t'(x);
        exp_mem[slot][v] = (x > 63) ? 63 : (x < -64) ? -64 : x;
        if (x > 63 || x < -64) n_sat++;
      end
      @(negedge clk);
      we = 0;
      foreach (din[v]) din[v] = sum_t'($urandom);
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
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
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

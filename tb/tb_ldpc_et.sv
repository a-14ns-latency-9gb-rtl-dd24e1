// tb_ldpc_et: test of the early-termination unit with the parity-check
// matrix rebuilt bit by bit in the testbench. For each rate: random
// codewords must pass (valid, zero syndrome); codewords with one or more
// flipped active bits must give exactly the syndrome the reference matrix
// predicts; flips in removed columns must be ignored; every single-bit error
// in an active column must be detected.
module tb_ldpc_et;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;
  logic [N-1:0] hard, active;
  logic [M-1:0] syn;
  logic         valid;
  int checks = 0, failures = 0, n_valid = 0, n_invalid = 0;

  ldpc_et dut (.hard_i(hard), .active_i(active), .syndrome_o(syn), .valid_o(valid));

  initial begin
    hmat_t h = build_h();
    for (int rt = 0; rt < 3; rt++) begin
      automatic rate_e rate = rate_e'(rt);
      automatic hrow_t act = active_mask(rate);
      for (int k = 0; k < 60; k++) begin
        automatic hrow_t x = random_codeword(h, rate);
        hrow_t y;
        logic [M-1:0] s;
        active = act;
        // codeword
        hard = x; #1;
        checks++;
        if (!valid || syn != '0 || syndrome(h, x) != '0) begin
          failures++; $display("FAIL rate %0d codeword rejected", rt);
        end else n_valid++;
        // corrupted word
        y = x;
        for (int f = 0; f <= k % 3; f++) begin
          automatic int b = $urandom_range(N - 1, rate_offset(rate));
          y[b] = ~y[b];
        end
        hard = y; #1;
        s = syndrome(h, y);
        checks++;
        if (syn != s || valid != (s == '0)) begin
          failures++; $display("FAIL rate %0d syndrome mismatch", rt);
        end
        if (!valid) n_invalid++;
        // flips in removed columns do not matter
        if (rate_offset(rate) > 0) begin
          hard = x; hard[$urandom_range(rate_offset(rate) - 1, 0)] ^= 1'b1; #1;
          checks++;
          if (!valid) begin failures++; $display("FAIL removed column counted"); end
        end
      end
    end
    // every single active-bit error must be detected, by the right checks
    for (int rt = 0; rt < 3; rt++) begin
      automatic rate_e rate = rate_e'(rt);
      automatic hrow_t x = random_codeword(h, rate);
      active = active_mask(rate);
      for (int b = int'(rate_offset(rate)); b < int'(N); b++) begin
        hard = x; hard[b] ^= 1'b1; #1;
        checks++;
        if (valid || syn != syndrome(h, hard)) begin
          failures++; $display("FAIL rate %0d single error in column %0d missed", rt, b);
        end
      end
    end
    if (n_valid == 0 || n_invalid == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

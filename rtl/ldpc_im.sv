// ldpc_im: input LLR memory (IM).
//
// Holds the channel LLR vectors of the two codewords that are decoded in
// interleaved fashion: 2 slots x 288 LLRs x 7 bits, as flip-flops so that
// every VN block reads its own LLRs directly every cycle.
//
// A write (we_i) fills one slot from the n' received LLRs of the selected
// rate (128, 192 or 256 of llr_i; the rest of llr_i is ignored). The i-th
// received LLR goes to the column tx_column(rate, i) of H; the columns that
// are punctured (the 32 columns 128..159) or removed at that rate are set to
// zero, as the paper prescribes for punctured bits. The two slots are read
// out in parallel (llr_o). Whole-vector writes are this design's interface
// choice; the paper does not describe how the chip loads the memory.
module ldpc_im
  import ldpc_pkg::*;
(
  input  logic  clk_i,
  input  logic  rst_ni,
  input  logic  we_i,
  input  logic  slot_i,
  input  rate_e rate_i,
  input  llr_t  llr_i [NP_MAX],  // received LLRs, index 0 first
  output llr_t  llr_o [2][N]     // stored vectors, by column of H
);

  llr_t mem [2][N];
  llr_t wdata [N];

  // Column v holds received LLR number (v - offset) below the punctured
  // range and (v - offset - 32) above it.
  for (genvar v = 0; v < int'(N); v++) begin : g_col
    always_comb begin
      int unsigned off;
      off = rate_offset(rate_i);
      if (v < int'(off) || (v >= int'(PUNCT_START) && v < int'(PUNCT_START + PUNCT_LEN)))
        wdata[v] = '0;
      else if (v < int'(PUNCT_START))
        wdata[v] = llr_i[v - off];
      else
        wdata[v] = llr_i[v - off - PUNCT_LEN];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem <= '{default: '0};
    end else if (we_i) begin
      mem[slot_i] <= wdata;
    end
  end

  assign llr_o = mem;

endmodule

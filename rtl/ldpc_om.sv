// ldpc_om: output LLR memory (OM).
//
// Holds the decoded soft outputs of the two interleaved codewords: 2 slots x
// 288 LLRs x 7 bits, the size the paper gives. When a codeword terminates
// (iteration limit or early termination) the controller writes its 288
// intrinsic LLRs into its slot; the 8-bit adder results are saturated to
// the 7-bit message range on the way in (this design's choice). Removed
// columns arrive as zero. Both slots are readable at all times and keep
// their contents until the slot's next codeword terminates.
module ldpc_om
  import ldpc_pkg::*;
(
  input  logic clk_i,
  input  logic rst_ni,
  input  logic we_i,
  input  logic slot_i,
  input  sum_t lout_i [N],     // intrinsic LLRs of the terminating codeword
  output llr_t llr_o  [2][N]
);

  llr_t mem [2][N];
  llr_t wdata [N];

  always_comb
    for (int v = 0; v < int'(N); v++) wdata[v] = sat_llr(int'(lout_i[v]));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mem <= '{default: '0};
    end else if (we_i) begin
      mem[slot_i] <= wdata;
    end
  end

  assign llr_o = mem;

endmodule

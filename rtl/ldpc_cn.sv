// ldpc_cn: check-node block.
//
// Receives the sign-magnitude messages q of the DEG variable nodes in its
// parity check and returns one broadcast answer to all of them: the XOR of
// all signs (the parity of the check) and the smallest and second smallest
// magnitude. Each PU then removes its own contribution (the "=" compare and
// MUX2 in the PU), which yields the min-sum rule over all other inputs.
//
// The two minima are found by a balanced tree of compare-select nodes: each
// node merges two (min1, min2) pairs with comparators and multiplexers, as
// the CN detail of the paper's architecture figure sketches. Inputs are
// padded to a power of two with the neutral magnitude 63. Purely
// combinational; it sits between R1 and R2 in the CN stage.
module ldpc_cn
  import ldpc_pkg::*;
#(
  parameter int unsigned DEG = 14     // VN connections of the CN
) (
  input  sm_t     q_i [DEG],
  output cn_msg_t cn_o
);

  localparam int unsigned LEAVES = 1 << $clog2(DEG < 2 ? 2 : DEG);

  typedef struct packed {
    mag_t min1;
    mag_t min2;
  } pair_t;

  // Merge two sorted pairs into the two smallest of the four values.
  function automatic pair_t merge(pair_t a, pair_t b);
    pair_t r;
    if (a.min1 <= b.min1) begin
      r.min1 = a.min1;
      r.min2 = (a.min2 <= b.min1) ? a.min2 : b.min1;
    end else begin
      r.min1 = b.min1;
      r.min2 = (b.min2 <= a.min1) ? b.min2 : a.min1;
    end
    return r;
  endfunction

  pair_t node [2*LEAVES];   // heap order: node[1] is the root
  logic  parity;

  always_comb begin
    for (int i = 0; i < int'(LEAVES); i++) begin
      node[LEAVES + i].min1 = (i < int'(DEG)) ? q_i[i].mag : mag_t'(MAG_MAX);
      node[LEAVES + i].min2 = mag_t'(MAG_MAX);
    end
    for (int i = int'(LEAVES) - 1; i >= 1; i--)
      node[i] = merge(node[2*i], node[2*i+1]);
    node[0] = node[1];
    parity = 1'b0;
    for (int i = 0; i < int'(DEG); i++) parity ^= q_i[i].sign;
    cn_o.sign = parity;
    cn_o.min1 = node[1].min1;
    cn_o.min2 = node[1].min2;
  end

endmodule

// ldpc_et: early-termination (ET) unit.
//
// Takes the sign bits of the 288 intrinsic LLRs as a hard decision (sign
// bit 1 = code bit 1) and evaluates all 96 parity checks of H on it. Columns
// removed at the current rate are masked to zero, so the same checks serve
// all three rates. valid_o is high when every check is satisfied, i.e. the
// hard decision is a codeword; the controller then terminates that
// codeword. Each check is an XOR over the columns the base matrix connects
// it to. Purely combinational: as the paper notes, ET lies on the critical
// path (intrinsic LLR -> XOR trees -> AND -> control).
module ldpc_et
  import ldpc_pkg::*;
(
  input  logic [N-1:0] hard_i,      // sign bits of the intrinsic LLRs
  input  logic [N-1:0] active_i,    // columns used at the selected rate
  output logic [M-1:0] syndrome_o,  // 1 = check m violated
  output logic         valid_o      // all checks satisfied
);

  logic [N-1:0] bits;
  assign bits = hard_i & active_i;

  for (genvar m = 0; m < int'(M); m++) begin : g_chk
    localparam int unsigned DEG = row_deg(m);
    logic [DEG-1:0] conn;
    for (genvar j = 0; j < int'(DEG); j++) begin : g_conn
      assign conn[j] = bits[cn_vn(m, j)];
    end
    assign syndrome_o[m] = ^conn;
  end

  assign valid_o = ~|syndrome_o;

endmodule

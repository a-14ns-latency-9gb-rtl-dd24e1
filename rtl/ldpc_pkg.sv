// ldpc_pkg: types, constants and code tables shared by the short-blocklength
// QC-LDPC decoder.
//
// The code is quasi-cyclic: a 12 x 36 base matrix whose entries are either
// empty or an 8 x 8 identity matrix rotated by a shift value, giving a
// 96 x 288 parity-check matrix H. The base matrix below is the one drawn in
// the paper's base-graph figure (one coloured square per non-empty entry,
// colour = shift 1..8). Row r*Z+i of H has its one in block column c at
// column c*Z + ((i + shift) mod Z); a printed shift of 8 therefore acts as
// the unrotated identity. That rotation direction is this design's choice.
//
// All connectivity (which VN talks to which CN over which edge) is derived
// from base_row() at elaboration time by the functions below, so the hardware
// is generic in the matrix: changing base_row() changes the wiring.
//
// Fixed point (from the paper): messages are 7-bit two's complement with
// 1 sign, 4 integer and 2 fractional bits; the VN sum has one more integer
// bit (8 bits). Edge weights alpha are 4-bit unsigned fractions (alpha/16),
// a format chosen here because the paper gives no trained values.
package ldpc_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned Z      = 8;    // lifting factor
  localparam int unsigned MB     = 12;   // base rows
  localparam int unsigned NB     = 36;   // base columns
  localparam int unsigned N      = NB * Z;  // 288 VN blocks
  localparam int unsigned M      = MB * Z;  // 96 CN blocks
  localparam int unsigned NP_MAX = 256;  // most transmitted LLRs (rate 3/4)
  localparam int unsigned PUNCT_START = 128; // first punctured column (0-based)
  localparam int unsigned PUNCT_LEN   = 32;  // punctured columns
  localparam int unsigned IMAX_DEFAULT = 10; // maximum iterations

  // ---------------------------------------------------------------- fixed point
  localparam int unsigned LLR_W  = 7;    // 1 sign + 4 integer + 2 fractional
  localparam int unsigned MAG_W  = LLR_W - 1;
  localparam int unsigned SUM_W  = LLR_W + 1; // one extra integer bit
  localparam int unsigned ALPHA_W    = 4;   // alpha = ALPHA / 2**ALPHA_FRAC
  localparam int unsigned ALPHA_FRAC = 4;
  localparam int unsigned ALPHA_DEFAULT = 12; // 0.75 on every edge
  localparam int MAG_MAX = (1 << MAG_W) - 1;  // 63
  localparam int LLR_MAX = (1 << (LLR_W - 1)) - 1; // 63
  localparam int LLR_MIN = -(1 << (LLR_W - 1));    // -64
  localparam int SUM_MAX = (1 << (SUM_W - 1)) - 1; // 127
  localparam int SUM_MIN = -(1 << (SUM_W - 1));    // -128

  typedef logic signed [LLR_W-1:0] llr_t;   // message / channel LLR
  typedef logic signed [SUM_W-1:0] sum_t;   // intrinsic LLR (VN sum)
  typedef logic        [MAG_W-1:0] mag_t;

  typedef struct packed {
    logic sign;
    mag_t mag;
  } sm_t;                                   // sign-magnitude message

  typedef struct packed {
    logic sign;   // XOR of all incoming signs
    mag_t min1;   // smallest incoming magnitude
    mag_t min2;   // second smallest incoming magnitude
  } cn_msg_t;                               // CN -> VN broadcast

  localparam sm_t SM_NEUTRAL = '{sign: 1'b0, mag: mag_t'(MAG_MAX)};

  typedef enum logic [1:0] {
    RATE_1_2 = 2'd0,   // n = 160, n' = 128, k = 64
    RATE_2_3 = 2'd1,   // n = 224, n' = 192, k = 128
    RATE_3_4 = 2'd2    // n = 288, n' = 256, k = 192
  } rate_e;

  // ---------------------------------------------------------------- base matrix
  // Shift of each 8 x 8 block: 0 = empty block, 1..8 = shift printed in the
  // base-graph figure. base_row(r)[4*c +: 4] is the entry of base row r,
  // column c (one hex digit per block, column 35 first, column 0 last).
  function automatic logic [4*NB-1:0] base_row(int r);
    case (r)
       0: return 144'h000000000008000000020000000000000000;
       1: return 144'h000000000012000000700000000000000000;
       2: return 144'h000000000530000004000000000000000000;
       3: return 144'h000000006300000070000000000000000000;
       4: return 144'h000000085035020000000004818000068075;
       5: return 144'h000000820528700000000030460500100388;
       6: return 144'h000001106820000600000600602403008830;
       7: return 144'h000066007604007000003000056730008608;
       8: return 144'h000460000700606800007710000213100700;
       9: return 144'h001200007000031400008101007063014000;
      10: return 144'h055000000005154000006012050050260004;
      11: return 144'h420000000020250700000148800001650080;
      default: return '0;
    endcase
  endfunction

  function automatic int base_at(int r, int c);
    logic [4*NB-1:0] row = base_row(r);
    return int'(row[4*c +: 4]);
  endfunction

  // ---------------------------------------------------------------- connectivity
  // The connectivity functions below read two packed tables that are built
  // once from base_row() (ROW_TAB, COL_TAB), so that elaborating hundreds of
  // instances stays cheap. CN m = r*Z + i
  // meets, in every non-empty block (r, c) of its base row, the VN
  // c*Z + ((i + shift) mod Z). A CN numbers its connections (ports) left to
  // right; a VN numbers its connections top to bottom.
  localparam int DC_MAX = 14;  // largest CN degree
  localparam int DV_MAX = 6;   // largest VN degree

  function automatic int shift_of(int r, int c);
    return base_at(r, c) % int'(Z);
  endfunction

  // Packed lookup tables, each computed once from the base matrix:
  //   ROW_TAB[r] = {degree, column of the j-th non-empty entry ...}
  //   COL_TAB[c] = {degree, row of the j-th non-empty entry, its port ...}
  typedef logic [DC_MAX-1:0][5:0] row_cols_t;
  typedef struct packed {
    logic [4:0] deg;
    row_cols_t  cols;
  } row_ent_t;
  typedef struct packed {
    logic [3:0]              deg;
    logic [DV_MAX-1:0][3:0]  rows;
    logic [DV_MAX-1:0][3:0]  ports;
  } col_ent_t;
  typedef row_ent_t [MB-1:0] row_tab_t;
  typedef col_ent_t [NB-1:0] col_tab_t;

  function automatic row_tab_t build_row_tab();
    row_tab_t t = '0;
    for (int r = 0; r < int'(MB); r++) begin
      logic [4*NB-1:0] row = base_row(r);
      int n = 0;
      for (int c = 0; c < int'(NB); c++)
        if (row[4*c +: 4] != 0) begin
          t[r].cols[n] = 6'(c);
          n++;
        end
      t[r].deg = 5'(n);
    end
    return t;
  endfunction

  function automatic col_tab_t build_col_tab();
    col_tab_t t = '0;
    int pos [MB];
    for (int r = 0; r < int'(MB); r++) pos[r] = 0;
    for (int c = 0; c < int'(NB); c++) begin
      int n = 0;
      for (int r = 0; r < int'(MB); r++)
        if (base_at(r, c) != 0) begin
          t[c].rows[n]  = 4'(r);
          t[c].ports[n] = 4'(pos[r]);
          pos[r]++;
          n++;
        end
      t[c].deg = 4'(n);
    end
    return t;
  endfunction

  localparam row_tab_t ROW_TAB = build_row_tab();
  localparam col_tab_t COL_TAB = build_col_tab();

  function automatic int row_deg(int m);          // CN degree
    return int'(ROW_TAB[m / Z].deg);
  endfunction

  function automatic int col_deg(int v);          // VN degree
    return int'(COL_TAB[v / Z].deg);
  endfunction

  function automatic int cn_vn(int m, int j);     // VN on port j of CN m
    int c = int'(ROW_TAB[m / Z].cols[j]);
    return c * Z + ((m % Z) + shift_of(m / Z, c)) % Z;
  endfunction

  function automatic int vn_cn(int v, int j);     // CN of connection j of VN v
    int r = int'(COL_TAB[v / Z].rows[j]);
    return r * Z + ((v % Z) - shift_of(r, v / Z) + Z) % Z;
  endfunction

  function automatic int vn_port(int v, int j);   // its port at that CN
    return int'(COL_TAB[v / Z].ports[j]);
  endfunction

  // Trained CN-to-VN weight of connection j of VN v. The paper trains one
  // weight per edge offline but does not list them; every edge gets
  // ALPHA_DEFAULT here. Replace this function to load trained weights.
  function automatic int alpha_of(int v, int j);
    return (v >= 0 && j >= 0) ? int'(ALPHA_DEFAULT) : 0;
  endfunction

  // ---------------------------------------------------------------- rates
  // Columns removed from the front of H to shorten the code.
  function automatic int unsigned rate_offset(rate_e rate);
    case (rate)
      RATE_1_2: return 128;
      RATE_2_3: return 64;
      default:  return 0;
    endcase
  endfunction

  // Number of transmitted (unpunctured) LLRs.
  function automatic int unsigned rate_nprime(rate_e rate);
    return N - rate_offset(rate) - PUNCT_LEN;
  endfunction

  // Information bits.
  function automatic int unsigned rate_k(rate_e rate);
    return N - rate_offset(rate) - M;
  endfunction

  // Column of H that carries the i-th transmitted LLR.
  function automatic int unsigned tx_column(rate_e rate, int unsigned i);
    int unsigned c = rate_offset(rate) + i;
    return (c < PUNCT_START) ? c : c + PUNCT_LEN;
  endfunction

  // ---------------------------------------------------------------- arithmetic
  function automatic llr_t sat_llr(int x);
    if (x > LLR_MAX) return llr_t'(LLR_MAX);
    if (x < LLR_MIN) return llr_t'(LLR_MIN);
    return llr_t'(x);
  endfunction

  function automatic sum_t sat_sum(int x);
    if (x > SUM_MAX) return sum_t'(SUM_MAX);
    if (x < SUM_MIN) return sum_t'(SUM_MIN);
    return sum_t'(x);
  endfunction

endpackage

// hpm_tree: column compression tree for an M x M unsigned partial-product
// array, reducing it to two rows that a carry-propagate adder then sums.
//
// The multiplier this belongs to reduces the partial products of each
// sub-multiplier with a High Performance Multiplier (HPM) style column
// compression tree. The exact HPM wiring is published elsewhere and is not
// reproduced here; this module builds a tree of the same kind (full-adder
// column compression with logarithmic depth) by a fixed greedy rule:
// at every level, each column's bits are taken three at a time into full
// adders, a remaining pair goes into a half adder and a single leftover bit
// passes to the next level unchanged. Sums stay in their column, carries
// move one column left. Levels are added until no column holds more than
// two bits. The heights of all columns at all levels are worked out at
// elaboration by the constant function calc_heights, so the tree is fixed
// wiring with no run-time control. Carries out of the leftmost column are
// dropped (a lint tool reports them as unused): they would weigh 2^(2M),
// and since every bit is non-negative and the product is below 2^(2M),
// they are always 0.
//
// Interface: pp[i][j] is the partial product of multiplier bit i and
// multiplicand bit j, of weight 2^(i+j). row0 + row1 (2M bits each) equals
// the sum of all partial products modulo 2^(2M), which for a product is the
// exact value. Combinational.
module hpm_tree #(
  parameter int unsigned M = 16
) (
  input  logic [M-1:0][M-1:0] pp,
  output logic [2*M-1:0]      row0,
  output logic [2*M-1:0]      row1
);
  localparam int COLS = 2 * M;
  localparam int HMAX = M + 2;   // no column ever holds more bits than this
  localparam int LMAX = 16;      // enough levels for any M up to 250

  typedef logic [LMAX-1:0][COLS-1:0][7:0] htab_t;

  // Heights of every column before every level, computed once.
  function automatic htab_t calc_heights();
    htab_t t;
    int h  [COLS];
    int hn [COLS];
    int nfa, nha, npass;
    t = '0;
    for (int k = 0; k < COLS; k++) begin
      h[k] = (k < M) ? k + 1 : (k < COLS - 1) ? 2 * M - 1 - k : 0;
    end
    for (int l = 0; l < LMAX; l++) begin
      for (int k = 0; k < COLS; k++) begin
        t[l][k] = 8'(h[k]);
        hn[k] = 0;
      end
      for (int k = 0; k < COLS; k++) begin
        nfa   = h[k] / 3;
        nha   = (h[k] % 3 == 2) ? 1 : 0;
        npass = h[k] - 3 * nfa - 2 * nha;
        hn[k] += nfa + nha + npass;
        if (k + 1 < COLS) hn[k+1] += nfa + nha;
      end
      for (int k = 0; k < COLS; k++) h[k] = hn[k];
    end
    return t;
  endfunction

  localparam htab_t HTAB = calc_heights();

  // Number of reduction levels needed to reach two rows.
  function automatic int num_levels();
    int lv;
    lv = 0;
    for (int l = 0; l < LMAX; l++) begin
      for (int k = 0; k < COLS; k++) begin
        if (HTAB[l][k] > 8'd2) lv = l + 1;
      end
    end
    return lv;
  endfunction

  localparam int LEVELS = num_levels();

  // bits[s][c][k]: bit k of column c before level s. Slots at or above the
  // column's height are tied to zero.
  logic [LEVELS:0][COLS-1:0][HMAX-1:0] bits;

  // Level 0: the partial-product array, column c holding every pp[i][j]
  // with i + j = c, lowest i first.
  for (genvar c = 0; c < COLS; c++) begin : g_init
    localparam int H0 = int'(HTAB[0][c]);
    localparam int I0 = (c < M) ? 0 : c - M + 1;
    for (genvar k = 0; k < HMAX; k++) begin : g_slot
      if (k < H0) begin : g_pp
        assign bits[0][c][k] = pp[I0+k][c-I0-k];
      end else begin : g_zero
        assign bits[0][c][k] = 1'b0;
      end
    end
  end

  for (genvar s = 0; s < LEVELS; s++) begin : g_level
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int H     = int'(HTAB[s][c]);
      localparam int NFA   = H / 3;
      localparam int NHA   = (H % 3 == 2) ? 1 : 0;
      localparam int NPASS = H - 3 * NFA - 2 * NHA;
      localparam int HL    = (c > 0) ? int'(HTAB[s][c-1]) : 0;
      localparam int NFAL  = HL / 3;
      localparam int NHAL  = (HL % 3 == 2) ? 1 : 0;
      localparam int OWN   = NFA + NHA + NPASS;  // bits this column keeps
      localparam int HN    = OWN + NFAL + NHAL;  // height at level s+1

      logic [HMAX-1:0] carry;  // carries this column sends left

      for (genvar f = 0; f < NFA; f++) begin : g_fa
        full_adder u_fa (
          .a (bits[s][c][3*f]),
          .b (bits[s][c][3*f+1]),
          .ci(bits[s][c][3*f+2]),
          .s (bits[s+1][c][f]),
          .co(carry[f])
        );
      end
      if (NHA == 1) begin : g_ha
        assign bits[s+1][c][NFA] = bits[s][c][3*NFA] ^ bits[s][c][3*NFA+1];
        assign carry[NFA]        = bits[s][c][3*NFA] & bits[s][c][3*NFA+1];
      end
      for (genvar p = 0; p < NPASS; p++) begin : g_pass
        assign bits[s+1][c][NFA+NHA+p] = bits[s][c][3*NFA+2*NHA+p];
      end
      for (genvar k = NFA + NHA; k < HMAX; k++) begin : g_nocarry
        assign carry[k] = 1'b0;
      end
      // Carries arriving from the column to the right.
      if (c > 0) begin : g_cin
        for (genvar k = 0; k < NFAL + NHAL; k++) begin : g_in
          assign bits[s+1][c][OWN+k] = g_col[c-1].carry[k];
        end
      end
      for (genvar k = HN; k < HMAX; k++) begin : g_zero
        assign bits[s+1][c][k] = 1'b0;
      end
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_out
    assign row0[c] = bits[LEVELS][c][0];
    assign row1[c] = bits[LEVELS][c][1];
  end
endmodule

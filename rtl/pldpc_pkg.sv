// pldpc_pkg -- constants, code description and fixed-point helpers shared by
// the layered PLDPC-Hadamard decoder.
//
// Default sizes are those of the decoder built on an FPGA for the rate-0.0494
// code: Hadamard order r = 4 (row weight d = 6), a 7 x 11 base matrix lifted by
// z1 = 32 and z2 = 512, N_h = 128 Hadamard sub-decoders (G = z2/N_h = 4 groups
// per layer) and the "S1" bit widths: 5-bit channel LLRs (1 sign, 1 int,
// 3 frac), 8-bit APP/extrinsic LLRs (1 sign, 4 int, 3 frac), 9-bit DFHT values
// (1 sign, 6 int, 2 frac).  The base matrix below is the published one.
//
// The second and first lifting permutations of that code are not published, so
// the per-layer (column set, CPM offset) table is generated here by a fixed
// formula (code_col / code_shift) that yields a proper double lifting: every
// B(i,j) entry becomes B(i,j) non-overlapping z1 x z1 cyclic permutations, and
// every "1" a z2 x z2 circulant.  Any other table of the same shape can be
// substituted without touching the datapath.
//
// The max* correction term ln(1+exp(-x)) is a small look-up table, rounded to
// the nearest step of the DFHT fraction (2 or 3 fractional bits).
// All functions take plain int arguments and are evaluated at elaboration or
// on small indices, so lint reports unused upper bits of some arguments (for
// example the base-row index, which only needs 3 bits); they cost no logic.
package pldpc_pkg;

  // ---- code and architecture defaults ------------------------------------
  localparam int R_DEF      = 4;     // Hadamard order r
  localparam int M_BASE     = 7;     // base matrix rows m
  localparam int N_BASE     = 11;    // base matrix columns n
  localparam int Z1_DEF     = 32;    // first lifting factor
  localparam int Z2_DEF     = 512;   // second lifting factor (CPM size)
  localparam int NH_DEF     = 128;   // number of Hadamard sub-decoders / RAMs per bank

  // ---- fixed-point formats (setting S1) -----------------------------------
  localparam int LLR_FRAC    = 3;    // fractional bits of every stored LLR
  localparam int W_CH_DEF    = 5;    // channel LLR: 1 sign + 1 int + 3 frac
  localparam int W_LLR_DEF   = 8;    // APP / extrinsic: 1 sign + 4 int + 3 frac
  localparam int W_DF_DEF    = 9;    // FHT output / DFHT: 1 sign + 6 int + 2 frac
  localparam int DF_FRAC_DEF = 2;

  // RAM read latency in cycles (address in cycle t, data usable in cycle t+1).
  localparam int RD_LAT = 1;

  // Base matrix B (7 x 11) of the rate-0.0494, r = 4 PLDPC-Hadamard code.
  localparam int BASE [M_BASE][N_BASE] = '{
    '{1,0,0,0,0,0,1,0,3,0,1},
    '{0,1,2,0,0,0,0,0,0,2,1},
    '{2,1,0,0,1,1,0,0,0,0,1},
    '{0,1,0,3,0,0,0,0,0,2,0},
    '{2,0,0,0,0,0,0,1,0,3,0},
    '{3,0,0,2,0,0,1,0,0,0,0},
    '{1,0,0,1,1,0,0,0,1,2,0}
  };

  // ---- Hadamard code positions ---------------------------------------------
  // Position in the length-2^r Hadamard codeword of the j-th P-VN of an H-CN
  // (j = 0..r+1): the embedded single-parity-check bits 0,1,2,4,...,2^(r-1),2^r-1.
  function automatic int spc_pos(int r, int j);
    if (j == 0)      return 0;
    else if (j <= r) return 1 << (j - 1);
    else             return (1 << r) - 1;
  endfunction

  function automatic bit is_spc(int r, int i);
    for (int j = 0; j < r + 2; j++) if (spc_pos(r, j) == i) return 1'b1;
    return 1'b0;
  endfunction

  // Position of the k-th D1H-VN (k = 0..2^r-r-3): the non-SPC positions, ascending.
  function automatic int d1h_pos(int r, int k);
    int c;
    c = 0;
    for (int i = 0; i < (1 << r); i++) begin
      if (!is_spc(r, i)) begin
        if (c == k) return i;
        c++;
      end
    end
    return 0;
  endfunction

  // ---- code table -----------------------------------------------------------
  // Layer k = i*z1 + a covers base row i.  Its d entries are taken in order of
  // base column j, and for B(i,j) > 1 of copy e = 0..B(i,j)-1.
  function automatic int entry_basecol(int i, int delta);
    int c;
    c = 0;
    for (int j = 0; j < N_BASE; j++)
      for (int e = 0; e < BASE[i][j]; e++) begin
        if (c == delta) return j;
        c++;
      end
    return 0;
  endfunction

  function automatic int entry_copy(int i, int delta);
    int c;
    c = 0;
    for (int j = 0; j < N_BASE; j++)
      for (int e = 0; e < BASE[i][j]; e++) begin
        if (c == delta) return e;
        c++;
      end
    return 0;
  endfunction

  // Column set (0 .. n*z1-1) of entry delta of layer k.
  function automatic int code_col(int k, int delta, int z1);
    int i, a, j, e;
    i = k / z1;
    a = k % z1;
    j = entry_basecol(i, delta);
    e = entry_copy(i, delta);
    return j * z1 + ((a + 7 * i + 3 * j + e) % z1);
  endfunction

  // CPM offset p (0 .. z2-1) of entry delta of layer k.
  function automatic int code_shift(int k, int delta, int z1, int z2);
    return (29 * k + 11 * code_col(k, delta, z1) + 5 * delta + 3) % z2;
  endfunction

  // ---- fixed point ------------------------------------------------------------
  function automatic int sat_int(int v, int w);
    int hi, lo;
    hi = (1 << (w - 1)) - 1;
    lo = -(1 << (w - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // round(2^frac * ln(1 + exp(-x / 2^frac))) for x = |a-b| in DFHT units.
  function automatic int maxstar_corr(int x, int frac);
    if (frac == 2) begin
      case (x)
        0: return 3;
        1, 2, 3: return 2;
        4, 5, 6, 7, 8: return 1;
        default: return 0;
      endcase
    end else begin
      case (x)
        0: return 6;
        1, 2: return 5;
        3, 4: return 4;
        5, 6, 7, 8: return 3;
        9, 10, 11, 12: return 2;
        13, 14, 15, 16, 17, 18, 19, 20, 21: return 1;
        default: return 0;
      endcase
    end
  endfunction

endpackage

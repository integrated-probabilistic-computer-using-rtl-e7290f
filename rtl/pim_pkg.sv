// pim_pkg -- widths, fixed-point formats and invertible-gate couplings shared by
// the probabilistic Ising machine (PIM) design area.
//
// The PIM holds a set of invertible array multipliers ("factorizers") made of
// probabilistic bits (p-bits). Each p-bit holds a spin m in {-1,+1}, stored as
// the bit 0/1. A p-bit's input is I = h + sum_j J_ij m_j and its update is
// m = sgn(I - T*atanh(u)), u uniform in (-1,1), which has the same statistics
// as m = sgn(tanh(I/T) + u).
//
// Widths that follow the paper's block diagrams: 15 random bits address the
// half-atanh table, one more random bit chooses its sign (16 in all), the
// table gives 11 bits, the temperature T has 16 bits, the scaled sample "wrng"
// has 7 bits, the p-bit input I has 6 bits, and up to 11 random bits choose
// the p-bit to update. The fixed-point formats below are this design's own
// choice: the atanh sample is Q3.7 (7 fraction bits), T is unsigned Q8.8, and
// I and wrng are plain signed integers in units of J.
//
// Gate couplings (J, h) are those of the invertible AND gate, half adder and
// full adder; ground states of each gate's energy
// E = -(sum h_i m_i + sum_{i<j} J_ij m_j m_i) are exactly its truth table.
package pim_pkg;

  // ---- random-number and PLU widths -------------------------------------
  localparam int unsigned LUT_AW    = 15;  // rng bits into the half-atanh table
  localparam int unsigned LUT_DW    = 11;  // table output width
  localparam int unsigned LUT_FRAC  = 7;   // fraction bits of the table output
  localparam int unsigned PLU_RNG_W = LUT_AW + 1;  // 16, sign bit on top
  localparam int unsigned T_W       = 16;  // temperature word
  localparam int unsigned T_FRAC    = 8;   // fraction bits of T
  localparam int unsigned WRNG_W    = 7;   // scaled random sample
  localparam int unsigned I_W       = 6;   // p-bit input
  localparam int unsigned IDX_W     = 11;  // p-bit index (2**11 >= 1143)
  localparam int unsigned RNG_W     = IDX_W + PLU_RNG_W;  // 27 random bits per iteration
  localparam int unsigned T_EXTRA   = 16;  // extra fraction bits of the annealing accumulator

  // ---- designs held by the PIM area ----------------------------------------
  // Multiplier widths N of the designs; design d factors 2N-bit numbers.
  // N = 3 .. 10 are the 6- to 20-bit factorizers (1140 p-bits); the 1 x 1
  // multiplier is a single invertible AND gate (3 p-bits), bringing the area
  // to 1143 p-bits.
  localparam int unsigned NDES = 9;
  localparam int unsigned DES_W = 4;
  localparam int unsigned DES_N [NDES] = '{1, 3, 4, 5, 6, 7, 8, 9, 10};

  typedef logic signed [WRNG_W-1:0] wrng_t;
  typedef logic signed [I_W-1:0]    pin_t;
  typedef logic        [T_W-1:0]    temp_t;

  // Width of one gate's contribution to one terminal (|c| <= 7).
  localparam int unsigned C_W = 5;
  typedef logic signed [C_W-1:0] contrib_t;

  // ---- invertible AND gate: terminals (A, B, C=A&B) -----------------------
  localparam int AND_J [3][3] = '{'{ 0, -1,  2},
                                  '{-1,  0,  2},
                                  '{ 2,  2,  0}};
  localparam int AND_H [3]    = '{1, 1, -2};

  // ---- invertible half adder: terminals (A, B, S, Co) ---------------------
  localparam int HA_J [4][4] = '{'{ 0, -1,  1,  2},
                                 '{-1,  0,  1,  2},
                                 '{ 1,  1,  0, -2},
                                 '{ 2,  2, -2,  0}};
  localparam int HA_H [4]    = '{1, 1, -1, -2};

  // ---- invertible full adder: terminals (A, B, Ci, S, Co) -----------------
  localparam int FA_J [5][5] = '{'{ 0, -1, -1,  1,  2},
                                 '{-1,  0, -1,  1,  2},
                                 '{-1, -1,  0,  1,  2},
                                 '{ 1,  1,  1,  0, -2},
                                 '{ 2,  2,  2, -2,  0}};
  localparam int FA_H [5]    = '{0, 0, 0, 0, 0};

  // ---- factorizer sizes ---------------------------------------------------
  // An N x N invertible array multiplier has 2N input p-bits, N*N partial
  // products and N*(N-1) adders with a sum and a carry each: 3*N*N p-bits.
  function automatic int unsigned mult_pbits(int unsigned n);
    return 3 * n * n;
  endfunction

  // First p-bit of design d in the area-wide numbering.
  function automatic int unsigned des_base(int unsigned d);
    int unsigned s;
    s = 0;
    for (int unsigned e = 0; e < d; e++) s += mult_pbits(DES_N[e]);
    return s;
  endfunction

  // Total p-bits of the area.
  function automatic int unsigned total_pbits();
    return des_base(NDES);
  endfunction

  // Bits needed to index 0..n-1 (at least 1).
  function automatic int unsigned idx_bits(int unsigned n);
    int unsigned b;
    b = 1;
    while ((1 << b) < n) b++;
    return b;
  endfunction


  // ---- p-bit numbering inside an N x N invertible array multiplier ----------
  // A[k] -> k, B[r] -> N + r, partial product A[k]&B[r] -> 2N + r*N + k,
  // adder (row r = 1..N-1, column k = 0..N-1): sum -> 2N + N*N + 2*((r-1)*N + k),
  // carry -> the same plus one. Row r adds partial products A[k]&B[r] to the
  // result of row r-1 shifted by one place; carries ripple from column k-1.
  function automatic int node_a(int k);         return k;                 endfunction
  function automatic int node_b(int n, int r);  return n + r;             endfunction
  function automatic int node_pp(int n, int r, int k); return 2*n + r*n + k; endfunction
  function automatic int node_sum(int n, int r, int k);
    return 2*n + n*n + 2*((r-1)*n + k);
  endfunction
  function automatic int node_carry(int n, int r, int k);
    return node_sum(n, r, k) + 1;
  endfunction
  // Second addend of adder (r,k): the row above, one column to the left; -1 if none.
  function automatic int node_y(int n, int r, int k);
    if (r == 1) return (k < n-1) ? node_pp(n, 0, k+1) : -1;
    return (k < n-1) ? node_sum(n, r-1, k+1) : node_carry(n, r-1, n-1);
  endfunction
  // Carry into adder (r,k); -1 for column 0.
  function automatic int node_cin(int n, int r, int k);
    return (k > 0) ? node_carry(n, r, k-1) : -1;
  endfunction
  // Product bit p (0 .. 2N-1) of the multiplier.
  function automatic int node_prod(int n, int p);
    if (p == 0)   return node_pp(n, 0, 0);
    if (n == 1)   return -1;
    if (p < n)    return node_sum(n, p, 0);
    if (p < 2*n-1) return node_sum(n, n-1, p-n+1);
    return node_carry(n, n-1, n-1);
  endfunction

  // Gate contribution helper: value of J*m for a stored spin bit.
  function automatic int spin_term(int j, logic m);
    return m ? j : -j;
  endfunction

endpackage

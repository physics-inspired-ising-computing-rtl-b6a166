// pbit_pkg -- shared types, fixed-point formats and lattice helpers of the
// ring-oscillator-activated p-computer.
//
// Number formats (the 10-bit weight width follows the paper; the split into
// integer and fraction bits is this design's choice):
//   weight_t  J_ij and h_i : signed 10 bits, 8 fraction bits (-2.0 .. +1.996),
//                            so the normalised range [-1,+1] is exact.
//   field_t   I_i          : signed 13 bits, 8 fraction bits; six neighbours
//                            plus a bias (|I| <= 8) can never overflow it.
//   beta_t    beta         : unsigned 8 bits, 4 fraction bits (0 .. 15.94);
//                            the schedule 0.5, 1.0 .. 7.0 is exact.
//   bx_t      beta*I       : signed 21 bits, 12 fraction bits.
//   act_t     tanh(beta*I) : signed 12 bits, 10 fraction bits.
//
// Chimera numbering: a ROWS x COLS grid of tiles, 8 spins per tile drawn as a
// complete bipartite K4,4. Spin index = (row*COLS + col)*8 + k. k = 0..3 is
// the "vertical" shore, k = 4..7 the "horizontal" shore. A vertical spin also
// couples to the same k in the tile above and below, a horizontal spin to
// the same k in the tile left and right. Each spin thus has DEG = 6 neighbour
// slots: slots 0..3 are the opposite shore of its own tile, slot 4 the
// lower-index tile neighbour (above / left), slot 5 the higher-index one
// (below / right). Slots that fall off the lattice edge are marked invalid.
package pbit_pkg;

  localparam int W_J     = 10;   // weight / bias width
  localparam int J_FRAC  = 8;    // weight fraction bits
  localparam int W_I     = 13;   // local field width
  localparam int W_BETA  = 8;    // beta width
  localparam int B_FRAC  = 4;    // beta fraction bits
  localparam int W_BX    = W_I + W_BETA;   // beta*I width (21)
  localparam int BX_FRAC = J_FRAC + B_FRAC; // 12
  localparam int W_ACT   = 12;   // activation width
  localparam int A_FRAC  = 10;   // activation fraction bits
  localparam int DEG     = 6;    // Chimera degree
  localparam int TILE    = 8;    // spins per tile
  localparam int SLOT_W  = 3;    // neighbour slot address (0..5 J, 6 h)
  localparam int SLOT_H  = 6;

  // tanh table: LUT_DEPTH entries over |beta*I| in steps of 1/LUT_STEP_INV
  localparam int LUT_DEPTH   = 256;
  localparam int LUT_STEP_SH = BX_FRAC - 5;  // index = |x| >> 7  (step 1/32)

  typedef logic signed [W_J-1:0]   weight_t;
  typedef logic signed [W_I-1:0]   field_t;
  typedef logic        [W_BETA-1:0] beta_t;
  typedef logic signed [W_BX-1:0]  bx_t;
  typedef logic signed [W_ACT-1:0] act_t;

  // ---------------------------------------------------------------- tanh
  // Entry k = round(1024 * tanh(k/32)), capped at 1023. Computed with
  // integer arithmetic only: e = exp(-2k/32) = EXP_M1_16^k in Q30, then
  // tanh = (1 - e) / (1 + e).
  localparam longint EXP_M1_16_Q30 = 64'd1008687096; // round(exp(-1/16)*2^30)

  typedef logic [A_FRAC-1:0] tanh_tab_t [LUT_DEPTH];

  function automatic tanh_tab_t make_tanh_table();
    tanh_tab_t t;
    longint one;
    longint e;
    longint v;
    one = 64'd1 << 30;
    e   = one;
    for (int k = 0; k < LUT_DEPTH; k++) begin
      v = (((one - e) << 11) / (one + e) + 1) >>> 1;  // round(1024*tanh)
      if (v > 1023) v = 1023;
      t[k] = A_FRAC'(v);
      e = (e * EXP_M1_16_Q30) >>> 30;
    end
    return t;
  endfunction

  localparam tanh_tab_t TANH_TAB = make_tanh_table();

  // ------------------------------------------------------------- Chimera
  function automatic int tile_row(int idx, int cols);
    return (idx / TILE) / cols;
  endfunction

  function automatic int tile_col(int idx, int cols);
    return (idx / TILE) % cols;
  endfunction

  // Index of the spin in neighbour slot s of spin idx, or -1 if none.
  function automatic int chimera_nbr(int idx, int s, int rows, int cols);
    int r, c, k, base;
    r    = tile_row(idx, cols);
    c    = tile_col(idx, cols);
    k    = idx % TILE;
    base = (idx / TILE) * TILE;
    if (s < 4) return (k < 4) ? base + 4 + s : base + s;
    if (k < 4) begin
      if (s == 4) return (r > 0)        ? base - cols * TILE + k : -1;
      else        return (r < rows - 1) ? base + cols * TILE + k : -1;
    end else begin
      if (s == 4) return (c > 0)        ? base - TILE + k : -1;
      else        return (c < cols - 1) ? base + TILE + k : -1;
    end
  endfunction

  // Slot of spin idx as seen from its neighbour in slot s (for J symmetry).
  function automatic int chimera_back_slot(int idx, int s);
    int k;
    k = idx % TILE;
    if (s < 4) return k % 4;
    return (s == 4) ? 5 : 4;
  endfunction

  // Bipartition: shore XOR checkerboard of tiles. No edge joins two spins
  // of the same partition.
  function automatic int chimera_part(int idx, int cols);
    int shore;
    shore = ((idx % TILE) >= 4) ? 1 : 0;
    return shore ^ ((tile_row(idx, cols) + tile_col(idx, cols)) % 2);
  endfunction

  // Clock of spin idx: partition p uses ROSCs p, p+2, p+4, ... and the spins
  // of a partition are dealt to its clocks round-robin. With 8 spins per
  // tile, 4 of each partition, q below numbers a partition's spins.
  function automatic int clock_of(int idx, int cols, int n_rosc);
    int q;
    q = (idx / TILE) * 4 + (idx % 4);
    return 2 * (q % (n_rosc / 2)) + chimera_part(idx, cols);
  endfunction

  // Distinct non-zero LFSR seed per spin (golden-ratio hash of the index).
  function automatic logic [31:0] seed_of(int idx);
    logic [31:0] s;
    s = 32'hACE1_2468 ^ (32'(idx + 1) * 32'h9E37_79B9);
    if (s == '0) s = 32'h1;
    return s;
  endfunction

endpackage

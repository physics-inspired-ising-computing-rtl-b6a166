// planted_pkg -- testbench-side generator of planted frustrated-loop Ising
// instances on a Chimera lattice, and the lattice helpers the testbenches
// use to check the hardware independently.
//
// Instance generation (after Hen et al., as used to evaluate the design):
// n_c = round(alpha * n) clauses. Each clause is found by a non-backtracking
// random walk from a random spin for at most l_max steps; when the walk
// returns to a spin already on its path, the closed part of the path is a
// loop, kept if its length is in [l_min, l_max], otherwise the walk starts
// over. A random planted state s is drawn; along each loop every coupling
// J_ab gains s_a*s_b except one randomly chosen coupling, which gains
// -s_a*s_b, so every loop is frustrated but s satisfies all other bonds.
// Couplings are kept as integers in both directions (the sum of J and J^T);
// weights for the hardware are J * 256 / max|J|, rounded, i.e. normalised
// to [-1, +1] with 8 fraction bits. Energies use E = -sum_{i<j} J_ij m_i m_j
// on the integer couplings; s is a ground state.
//
// Lattice numbering (also the hardware's): spin = (row*cols + col)*8 + k,
// k < 4 vertical shore, k >= 4 horizontal shore; neighbour slots 0..3 are
// the opposite shore of the tile, slot 4 the tile above (vertical) / left
// (horizontal), slot 5 below / right.
package planted_pkg;

  localparam int MAXN = 800;

  function automatic int nbr(int idx, int s, int rows, int cols);
    int t, r, c, k;
    t = idx / 8; k = idx % 8; r = t / cols; c = t % cols;
    if (s < 4) return (k < 4) ? t * 8 + 4 + s : t * 8 + s;
    if (k < 4) begin
      if (s == 4) return (r == 0) ? -1 : ((r - 1) * cols + c) * 8 + k;
      return (r == rows - 1) ? -1 : ((r + 1) * cols + c) * 8 + k;
    end
    if (s == 4) return (c == 0) ? -1 : (r * cols + c - 1) * 8 + k;
    return (c == cols - 1) ? -1 : (r * cols + c + 1) * 8 + k;
  endfunction

  function automatic int slot_of(int i, int j, int rows, int cols);
    for (int s = 0; s < 6; s++) if (nbr(i, s, rows, cols) == j) return s;
    return -1;
  endfunction

  class planted_instance;
    int rows, cols, n, n_clauses;
    int jint [MAXN][6];
    int spin [MAXN];     // planted state, +1 / -1
    int maxabs;

    function new(int r, int c);
      rows = r; cols = c; n = r * c * 8;
      for (int i = 0; i < MAXN; i++) begin
        spin[i] = 1;
        for (int s = 0; s < 6; s++) jint[i][s] = 0;
      end
      maxabs = 1;
      n_clauses = 0;
    endfunction

    function void add(int a, int b, int v);
      int sa, sb;
      sa = slot_of(a, b, rows, cols);
      sb = slot_of(b, a, rows, cols);
      jint[a][sa] += v;
      jint[b][sb] += v;
    endfunction

    // alpha given in percent
    function void generate_loops(int alpha_pct, int lmin, int lmax);
      int path [16];
      int len, cur, prev, nxt, cand [6], nc, pos, k, flip;
      int target;
      for (int i = 0; i < n; i++) spin[i] = ($urandom_range(1) == 1) ? 1 : -1;
      target = (alpha_pct * n + 50) / 100;
      while (n_clauses < target) begin
        len = 1;
        path[0] = $urandom_range(n - 1);
        prev = -1;
        pos = -1;
        for (int step = 0; step < lmax && pos < 0; step++) begin
          cur = path[len - 1];
          nc = 0;
          for (int s = 0; s < 6; s++) begin
            nxt = nbr(cur, s, rows, cols);
            if (nxt >= 0 && nxt != prev) begin cand[nc] = nxt; nc++; end
          end
          if (nc == 0) break;
          nxt = cand[$urandom_range(nc - 1)];
          for (int p = 0; p < len; p++) if (path[p] == nxt) pos = p;
          if (pos < 0) begin path[len] = nxt; len++; prev = cur; end
        end
        if (pos < 0) continue;            // no loop closed within l_max steps
        k = len - pos;                    // loop path[pos .. len-1], back to path[pos]
        if (k < lmin || k > lmax) continue;
        flip = $urandom_range(k - 1);
        for (int q = 0; q < k; q++) begin
          int a, b;
          a = path[pos + q];
          b = path[pos + ((q + 1) % k)];
          add(a, b, (q == flip) ? -spin[a] * spin[b] : spin[a] * spin[b]);
        end
        n_clauses++;
      end
      maxabs = 1;
      for (int i = 0; i < n; i++)
        for (int s = 0; s < 6; s++)
          if (jint[i][s] > maxabs || -jint[i][s] > maxabs)
            maxabs = (jint[i][s] > 0) ? jint[i][s] : -jint[i][s];
    endfunction

    // unfrustrated instance: every bond satisfied by the planted state
    function void generate_gauge_ferro();
      for (int i = 0; i < n; i++) spin[i] = ($urandom_range(1) == 1) ? 1 : -1;
      for (int i = 0; i < n; i++)
        for (int s = 0; s < 6; s++) begin
          int j;
          j = nbr(i, s, rows, cols);
          jint[i][s] = (j >= 0) ? spin[i] * spin[j] : 0;
        end
      maxabs = 1;
    endfunction

    // hardware weight (8 fraction bits) of slot s of spin i
    function int weight(int i, int s);
      int num;
      num = jint[i][s] * 512 / maxabs;
      return (num >= 0) ? (num + 1) / 2 : -((-num + 1) / 2);
    endfunction

    function int energy_of_bits(logic [MAXN-1:0] m);
      int e;
      e = 0;
      for (int i = 0; i < n; i++)
        for (int s = 0; s < 6; s++) begin
          int j;
          j = nbr(i, s, rows, cols);
          if (j > i) e -= jint[i][s] * (m[i] ? 1 : -1) * (m[j] ? 1 : -1);
        end
      return e;
    endfunction

    function int planted_energy();
      logic [MAXN-1:0] m;
      m = '0;
      for (int i = 0; i < n; i++) m[i] = (spin[i] > 0);
      return energy_of_bits(m);
    endfunction
  endclass

endpackage

// chimera_array_tb -- a 2 x 3-tile array (48 p-bits) driven by ten free
// running clocks with half periods 9, 11, ..., 27 master cycles.
//  1. bias only (J = 0, h = +-1, beta = 7): every spin follows its bias;
//  2. planted unfrustrated lattice (J_ij = s_i s_j on every edge, bias
//     h_i = s_i/2): after an anneal from beta 0.5 to 7 every spin with a
//     field |I| >= 1 must be aligned with it, and at least two of four
//     trials must end in exactly s.
//     Slots without a neighbour hold random weights that must be ignored;
//  3. run low: no spin changes;
//  4. clocking: a spin changes only on a rising edge of one clock, every
//     clock serves only one side of the bipartition and each clock drives
//     the same number of spins. Clock edges of coupled spins that coincide
//     (collisions) are counted.
module chimera_array_tb;
  import pbit_pkg::*;
  import planted_pkg::*;
  localparam int R = 2, C = 3, NR = 10, N = R * C * 8;
  logic clk = 1'b0, rst_n, run;
  logic [NR-1:0] rc, rc_q;
  beta_t beta;
  weight_t j_all [N][DEG];
  weight_t h_all [N];
  logic [N-1:0] m, m_q;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  chimera_array #(.ROWS(R), .COLS(C), .N_ROSC(NR)) dut (
    .rosc_clks(rc), .rst_n(rst_n), .run(run), .beta(beta), .j_all(j_all), .h_all(h_all), .m(m));

  int tcnt [NR];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc <= '0;
      for (int k = 0; k < NR; k++) tcnt[k] <= k;   // staggered phases
    end else begin
      for (int k = 0; k < NR; k++) begin
        if (tcnt[k] >= 9 + 2 * k - 1) begin tcnt[k] <= 0; rc[k] <= ~rc[k]; end
        else tcnt[k] <= tcnt[k] + 1;
      end
    end
  end

  // which clock each spin changes on: the clocks that rose at every one of its changes
  logic [NR-1:0] seen [N];
  int n_changes = 0, n_bad_edge = 0, n_collide = 0;
  always @(posedge clk) begin
    rc_q <= rc;
    m_q  <= m;
  end
  always @(negedge clk) if (rst_n) begin
    logic [NR-1:0] rise;
    rise = rc & ~rc_q;
    for (int i = 0; i < N; i++) begin
      if (m[i] != m_q[i]) begin
        n_changes++;
        if (rise == '0) n_bad_edge++;
        seen[i] &= rise;
      end
    end
  end

  planted_pkg::planted_instance inst;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic set_bias_only(int hv);
    for (int i = 0; i < N; i++) begin
      h_all[i] = weight_t'(hv);
      for (int s = 0; s < DEG; s++) j_all[i][s] = '0;
    end
  endtask

  initial begin
    #40000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] frozen, want;
    int part_of_clk [NR];
    int users [NR];
    int wrong;
    int n_ground = 0;
    for (int i = 0; i < N; i++) seen[i] = '1;
    rst_n = 1'b0; run = 1'b0; beta = beta_t'(112);
    set_bias_only(256);
    #5 rst_n = 1'b1;
    // 1. bias only
    run = 1'b1;
    repeat (600) @(posedge clk);
    chk(m == '1, "all spins +1 under bias +1");
    set_bias_only(-256);
    repeat (600) @(posedge clk);
    chk(m == '0, "all spins -1 under bias -1");
    // 2. planted unfrustrated lattice, annealed
    for (int trial = 0; trial < 4; trial++) begin
      inst = new(R, C);
      inst.generate_gauge_ferro();
      want = '0;
      for (int i = 0; i < N; i++) begin
        want[i] = (inst.spin[i] > 0);
        h_all[i] = weight_t'(inst.spin[i] * 128);
        for (int s = 0; s < DEG; s++)
          j_all[i][s] = (nbr(i, s, R, C) >= 0) ? weight_t'(inst.weight(i, s))
                                                : weight_t'($urandom_range(255));
      end
      beta = '0;                       // infinite temperature: randomise first
      repeat (300) @(posedge clk);
      for (int b = 8; b <= 112; b += 8) begin
        beta = beta_t'(b);
        repeat (800) @(posedge clk);
      end
      wrong = 0;
      for (int i = 0; i < N; i++) if (m[i] != want[i]) wrong++;
      if (wrong == 0) n_ground++;
      $display("trial %0d: %0d spins differ from the planted state", trial, wrong);
      // every spin with a strong field (|I| >= 1, computed here from the
      // tb's own lattice) must be aligned with it at beta = 7
      for (int i = 0; i < N; i++) begin
        int f;
        f = int'(h_all[i]);
        for (int s = 0; s < DEG; s++) begin
          int j;
          j = nbr(i, s, R, C);
          if (j >= 0) f += m[j] ? inst.weight(i, s) : -inst.weight(i, s);
        end
        if (f >= 256 || f <= -256)
          chk(m[i] == (f > 0), $sformatf("trial %0d: spin %0d against its field %0d", trial, i, f));
      end
    end
    chk(n_ground >= 2, $sformatf("planted state reached in %0d of 4 trials", n_ground));
    // 3. run low freezes the array
    beta = beta_t'(8);
    run = 1'b0;
    repeat (200) @(posedge clk);   // run passes a 2-flop synchroniser per clock
    frozen = m;
    repeat (1000) @(posedge clk);
    chk(m == frozen, "no change while run is low");
    // 4. clocking
    chk(n_changes > 100, $sformatf("spins changed %0d times", n_changes));
    chk(n_bad_edge == 0, $sformatf("%0d changes off a clock edge", n_bad_edge));
    for (int k = 0; k < NR; k++) begin part_of_clk[k] = -1; users[k] = 0; end
    for (int i = 0; i < N; i++) begin
      int ck, p;
      // a spin's clock is the one whose edge coincided with every change
      ck = -1;
      chk($onehot(seen[i]), $sformatf("spin %0d: clock not identified (%b)", i, seen[i]));
      for (int k = 0; k < NR; k++) if (seen[i] == NR'(1) << k) ck = k;
      if (ck < 0) continue;
      users[ck]++;
      // side of the bipartition, from the tb's own lattice: shore ^ tile parity
      p = ((i % 8) >= 4 ? 1 : 0) ^ (((i / 8) / C + (i / 8) % C) % 2);
      if (part_of_clk[ck] < 0) part_of_clk[ck] = p;
      chk(part_of_clk[ck] == p, $sformatf("clock %0d drives both partitions (spin %0d)", ck, i));
    end
    for (int k = 0; k < NR; k++)
      chk(users[k] == N / NR || users[k] == N / NR + 1, $sformatf("clock %0d drives %0d spins", k, users[k]));
    $display("changes=%0d", n_changes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// pcomputer_top_tb -- end-to-end run of the p-computer on a 2 x 2-tile
// Chimera (32 p-bits, the smallest problem size evaluated with the design)
// with a shortened schedule (HOLD_CYCLES = 3000, i.e. about 94 sweeps per
// beta step instead of 937).
//
// The testbench plays the host: it generates a planted frustrated-loop
// instance (alpha = 0.4, loop lengths 4..8), writes every weight through
// the configuration port, runs TRIALS annealing trials and computes the
// energy of each final state. It checks
//   - every ring oscillator's frequency through the frequency counter,
//   - the trial length (14 beta values x HOLD_CYCLES) and the beta sequence,
//   - that the spins are frozen between trials,
//   - that no final energy is below the planted (ground) energy and that
//     the planted energy is reached in at least one trial,
// and counts how often each mechanism occurred: ring-oscillator edges per
// clock, beta steps, trials completed, collisions (coupled p-bits on
// different clocks whose edges fall in the same master cycle), frozen
// checks, frequency measurements and ground-state hits. A mechanism that
// never occurred counts as a failure.
module pcomputer_top_tb;
  import pbit_pkg::*;
  import planted_pkg::*;
  localparam int R = 2, C = 2, NR = 10, N = R * C * 8;
  localparam int HOLD = 3000;
  localparam int TRIALS = 6;
  localparam int GATE = 3000;
  localparam int AW = $clog2(N) + SLOT_W;

  logic clk = 1'b0, rst_n;
  logic cfg_we;
  logic [AW-1:0] cfg_addr;
  weight_t cfg_wdata;
  logic start, busy, done;
  beta_t beta;
  logic [N-1:0] m;
  logic [3:0] fc_sel;
  logic fc_start, fc_valid;
  logic [15:0] fc_count;
  logic [NR-1:0] rosc_clks, rc_q;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;   // 2 time units per master cycle

  pcomputer_top #(.ROWS(R), .COLS(C), .N_ROSC(NR), .HOLD_CYCLES(HOLD), .GATE_CYCLES(GATE)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .start(start), .busy(busy), .done(done), .beta(beta), .m(m),
    .fc_sel(fc_sel), .fc_start(fc_start), .fc_count(fc_count), .fc_valid(fc_valid),
    .rosc_clks(rosc_clks));

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ------------------------------------------------ mechanism counters
  int n_edges [NR];
  int n_beta_steps = 0, n_done = 0, n_collide = 0, n_frozen = 0, n_fc = 0, n_ground = 0;
  int busy_cyc = 0;
  bit coupled_clk [NR][NR];
  beta_t beta_q;

  always @(posedge clk) begin
    rc_q   <= rosc_clks;
    beta_q <= beta;
    if (busy) busy_cyc <= busy_cyc + 1;
  end
  always @(negedge clk) if (rst_n) begin
    logic [NR-1:0] rise;
    rise = rosc_clks & ~rc_q;
    for (int k = 0; k < NR; k++) if (rise[k]) n_edges[k]++;
    if (busy) begin
      for (int a = 0; a < NR; a++)
        for (int b = a + 1; b < NR; b++)
          if (rise[a] && rise[b] && coupled_clk[a][b]) n_collide++;
      if (beta > beta_q) begin   // (the drop back to 0.5 starts a trial)
        n_beta_steps++;
        chk(int'(beta) == int'(beta_q) + 8, "beta steps by 0.5");
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  planted_pkg::planted_instance inst;

  initial begin
    int e_plant, e, best;
    logic [N-1:0] held;
    logic [MAXN-1:0] mm;
    for (int k = 0; k < NR; k++) n_edges[k] = 0;
    for (int a = 0; a < NR; a++) for (int b = 0; b < NR; b++) coupled_clk[a][b] = 0;
    for (int i = 0; i < N; i++)
      for (int s = 0; s < 6; s++) begin
        int j;
        j = nbr(i, s, R, C);
        if (j >= 0 && clock_of(i, C, NR) != clock_of(j, C, NR))
          coupled_clk[clock_of(i, C, NR)][clock_of(j, C, NR)] = 1;
      end
    for (int a = 0; a < NR; a++) for (int b = 0; b < NR; b++)
      if (coupled_clk[a][b]) coupled_clk[b][a] = 1;

    rst_n = 1'b0; cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0; start = 1'b0;
    fc_sel = '0; fc_start = 1'b0;
    #5 rst_n = 1'b1;

    // ring oscillator frequencies: edges in GATE cycles = GATE / (2*ring)
    for (int k = 0; k < NR; k++) begin
      int ex;
      @(negedge clk); fc_sel = 4'(k); fc_start = 1'b1;
      @(negedge clk); fc_start = 1'b0;
      while (!fc_valid) @(negedge clk);
      ex = GATE / (2 * (9 + 2 * k));
      n_fc++;
      chk(int'(fc_count) >= ex - 1 && int'(fc_count) <= ex + 1,
          $sformatf("ROSC %0d: %0d edges in %0d cycles, expected %0d", k, fc_count, GATE, ex));
    end

    // planted instance, loaded through the configuration port
    inst = new(R, C);
    inst.generate_loops(40, 4, 8);
    e_plant = inst.planted_energy();
    $display("instance: %0d spins, %0d clauses, max|J| = %0d, planted energy %0d",
             N, inst.n_clauses, inst.maxabs, e_plant);
    for (int i = 0; i < N; i++)
      for (int s = 0; s < 6; s++)
        if (nbr(i, s, R, C) >= 0) begin
          @(negedge clk);
          cfg_we = 1'b1; cfg_addr = AW'(i * 8 + s); cfg_wdata = weight_t'(inst.weight(i, s));
        end
    @(negedge clk) cfg_we = 1'b0;

    best = 1 << 30;
    for (int t = 0; t < TRIALS; t++) begin
      int c0;
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      c0 = busy_cyc;
      chk(busy && beta == 8, "trial starts at beta 0.5");
      while (!done) @(negedge clk);
      n_done++;
      chk(busy_cyc - c0 == 14 * HOLD - 1 + 1, $sformatf("trial length %0d cycles", busy_cyc - c0));
      chk(beta == 112, "trial ends at beta 7.0");
      // spins freeze once run has passed the per-clock synchronisers
      repeat (200) @(negedge clk);
      held = m;
      repeat (500) @(negedge clk);
      n_frozen++;
      chk(m == held, "spins frozen after the trial");
      mm = '0;
      mm[N-1:0] = m;
      e = inst.energy_of_bits(mm);
      $display("trial %0d: energy %0d (planted %0d)", t, e, e_plant);
      chk(e >= e_plant, "energy not below the planted ground energy");
      if (e == e_plant) n_ground++;
      if (e < best) best = e;
    end

    // every mechanism must have happened
    for (int k = 0; k < NR; k++) chk(n_edges[k] > 0, $sformatf("ROSC %0d never ticked", k));
    chk(n_beta_steps == 13 * TRIALS, $sformatf("beta steps %0d", n_beta_steps));
    chk(n_done == TRIALS, "trials completed");
    chk(n_collide > 0, "no collision between coupled p-bits occurred");
    chk(n_frozen > 0, "freeze checked");
    chk(n_fc == NR, "frequency measurements");
    chk(n_ground > 0, "planted ground state never reached");
    $display("mechanisms: rosc_edges[0]=%0d rosc_edges[9]=%0d beta_steps=%0d trials=%0d collisions=%0d frozen=%0d freq_meas=%0d ground_hits=%0d",
             n_edges[0], n_edges[NR-1], n_beta_steps, n_done, n_collide, n_frozen, n_fc, n_ground);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// pcomputer_full_tb -- one complete annealing trial of the p-computer at
// its default size and schedule: 800 p-bits (10 x 10 Chimera tiles), ten
// ring oscillators, beta 0.5 .. 7.0 in 14 steps of 29984 master cycles
// (937 sweeps each), 1.4 ms of simulated time at 300 MHz.
//
// The host side generates a planted frustrated-loop instance on all 800
// spins (alpha = 0.4, loop lengths 4..8), loads it, measures ROSC 0 and
// ROSC 9 with the frequency counter, runs one trial and checks the trial
// length, the final beta, that the spins freeze afterwards, that the final
// energy is not below the planted ground energy and that it lies within
// 20 % of it (a single trial at this size rarely hits the ground state).
module pcomputer_full_tb;
  import pbit_pkg::*;
  import planted_pkg::*;
  localparam int N = 800, AW = $clog2(N) + SLOT_W;

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
  logic [9:0] rosc_clks;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  pcomputer_top dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .start(start), .busy(busy), .done(done), .beta(beta), .m(m),
    .fc_sel(fc_sel), .fc_start(fc_start), .fc_count(fc_count), .fc_valid(fc_valid),
    .rosc_clks(rosc_clks));

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int busy_cyc = 0;
  always @(posedge clk) if (busy) busy_cyc <= busy_cyc + 1;

  initial begin
    #3000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  planted_pkg::planted_instance inst;

  initial begin
    int e_plant, e;
    logic [N-1:0] held;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0; start = 1'b0;
    fc_sel = '0; fc_start = 1'b0;
    #5 rst_n = 1'b1;
    // ring sizes 9 and 27: 30000 / 18 = 1666 and 30000 / 54 = 555 edges
    for (int q = 0; q < 2; q++) begin
      int ex;
      @(negedge clk); fc_sel = (q == 0) ? 4'd0 : 4'd9; fc_start = 1'b1;
      @(negedge clk); fc_start = 1'b0;
      while (!fc_valid) @(negedge clk);
      ex = (q == 0) ? 1666 : 555;
      chk(int'(fc_count) >= ex - 1 && int'(fc_count) <= ex + 1,
          $sformatf("ROSC count %0d, expected %0d", fc_count, ex));
    end
    inst = new(10, 10);
    inst.generate_loops(40, 4, 8);
    e_plant = inst.planted_energy();
    $display("instance: %0d spins, %0d clauses, max|J| = %0d, planted energy %0d",
             N, inst.n_clauses, inst.maxabs, e_plant);
    for (int i = 0; i < N; i++)
      for (int s = 0; s < 6; s++)
        if (nbr(i, s, 10, 10) >= 0) begin
          @(negedge clk);
          cfg_we = 1'b1; cfg_addr = AW'(i * 8 + s); cfg_wdata = weight_t'(inst.weight(i, s));
        end
    @(negedge clk) cfg_we = 1'b0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    chk(busy_cyc == 14 * 29984, $sformatf("trial length %0d cycles, expected %0d", busy_cyc, 14 * 29984));
    chk(beta == 112, "trial ends at beta 7.0");
    repeat (200) @(negedge clk);
    held = m;
    repeat (500) @(negedge clk);
    chk(m == held, "spins frozen after the trial");
    e = inst.energy_of_bits(m);
    $display("final energy %0d, planted ground energy %0d", e, e_plant);
    chk(e >= e_plant, "energy not below the planted ground energy");
    chk(e * 10 <= e_plant * 8, "final energy within 20 % of the ground energy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

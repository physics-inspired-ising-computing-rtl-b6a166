// planted_sizes_tb -- the evaluation workload: planted frustrated-loop
// instances (alpha = 0.4, loop lengths 4..8) on k x k-tile sub-lattices
// for k = 2 .. 10, i.e. 32, 72, 128, 200, 288, 392, 512, 648 and 800
// spins, all run on the same default 800-p-bit machine with the full
// annealing schedule. Spins outside the k x k corner keep zero weights and
// do not affect the problem. One trial per size (three at 32 spins). For
// each trial the final energy must not be below the planted ground energy
// and must lie within 20 % of it; at 32 spins the ground state must be
// found at least once. The residual energy of every trial is printed.
module planted_sizes_tb;
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
  logic fc_valid;
  logic [15:0] fc_count;
  logic [9:0] rosc_clks;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  pcomputer_top dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata),
    .start(start), .busy(busy), .done(done), .beta(beta), .m(m),
    .fc_sel(4'd0), .fc_start(1'b0), .fc_count(fc_count), .fc_valid(fc_valid),
    .rosc_clks(rosc_clks));

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // hardware index of spin i of a k x k sub-lattice in the 10 x 10 machine
  function automatic int hw(int i, int k);
    int t;
    t = i / 8;
    return ((t / k) * 10 + t % k) * 8 + i % 8;
  endfunction

  initial begin
    #40000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  planted_pkg::planted_instance inst;

  initial begin
    int e_plant, e, hits32;
    logic [MAXN-1:0] mm;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_addr = '0; cfg_wdata = '0; start = 1'b0;
    #5 rst_n = 1'b1;
    hits32 = 0;
    for (int k = 2; k <= 10; k++) begin
      inst = new(k, k);
      inst.generate_loops(40, 4, 8);
      e_plant = inst.planted_energy();
      // clear the whole machine, then load the k x k instance
      for (int i = 0; i < N; i++)
        for (int s = 0; s < 6; s++) begin
          @(negedge clk);
          cfg_we = 1'b1; cfg_addr = AW'(i * 8 + s); cfg_wdata = '0;
        end
      for (int i = 0; i < inst.n; i++)
        for (int s = 0; s < 6; s++)
          if (nbr(i, s, k, k) >= 0) begin
            @(negedge clk);
            cfg_we = 1'b1; cfg_addr = AW'(hw(i, k) * 8 + s); cfg_wdata = weight_t'(inst.weight(i, s));
          end
      @(negedge clk) cfg_we = 1'b0;
      for (int t = 0; t < ((k == 2) ? 3 : 1); t++) begin
        @(negedge clk); start = 1'b1;
        @(negedge clk); start = 1'b0;
        while (!done) @(negedge clk);
        repeat (200) @(negedge clk);
        mm = '0;
        for (int i = 0; i < inst.n; i++) mm[i] = m[hw(i, k)];
        e = inst.energy_of_bits(mm);
        $display("n = %0d spins, %0d clauses: final energy %0d, planted %0d, residual %0d",
                 inst.n, inst.n_clauses, e, e_plant, e - e_plant);
        chk(e >= e_plant, "energy not below the planted ground energy");
        chk(e * 10 <= e_plant * 8, "final energy within 20 % of the ground energy");
        if (k == 2 && e == e_plant) hits32++;
      end
    end
    chk(hits32 > 0, "ground state found at 32 spins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// anneal_ctrl_tb -- short schedule (4 steps of 7 cycles): checks the beta
// sequence 0.5, 1.0, 1.5, 2.0, how long each value is held, the trial
// length, the done pulse, and that start is ignored while busy. Then runs
// the default 14-step schedule and checks it ends at beta = 7.0 after
// 14 x 29984 cycles.
module anneal_ctrl_tb;
  import pbit_pkg::*;
  logic clk = 1'b0, rst_n, start;
  logic  run0, busy0, done0, run1, busy1, done1;
  beta_t beta0, beta1;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  anneal_ctrl #(.N_STEPS(4), .HOLD_CYCLES(7)) u_small (
    .clk(clk), .rst_n(rst_n), .start(start), .run(run0), .beta(beta0), .busy(busy0), .done(done0));
  anneal_ctrl u_full (
    .clk(clk), .rst_n(rst_n), .start(start), .run(run1), .beta(beta1), .busy(busy1), .done(done1));

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, hold, last_beta, ndone, beta_max;
    rst_n = 1'b0; start = 1'b0;
    #3 rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    // now in the first cycle of the trial
    chk(busy0 && run0 && beta0 == 8, "trial starts at beta 0.5");
    cyc = 0; hold = 0; last_beta = 8; ndone = 0; beta_max = 0;
    while (busy1) begin
      if (busy0) begin
        cyc++;
        if (int'(beta0) == last_beta) hold++;
        else begin
          chk(hold == 7, $sformatf("beta %0d held %0d cycles", last_beta, hold));
          chk(int'(beta0) == last_beta + 8, "beta steps by 0.5");
          last_beta = int'(beta0); hold = 1;
        end
        if (cyc == 10) begin start = 1'b1; end   // ignored while busy
        if (cyc == 11) begin start = 1'b0; chk(beta0 == 16, "start while busy ignored"); end
      end
      if (done0) begin
        ndone++;
        chk(cyc == 28, $sformatf("small trial length %0d, expected 28", cyc));
      end
      if (int'(beta1) > beta_max) beta_max = int'(beta1);
      @(negedge clk);
      cyc += 0;
    end
    chk(ndone == 1, "one done pulse from the short schedule");
    chk(last_beta == 32, "short schedule ends at beta 2.0");
    chk(done1, "done from the full schedule");
    chk(beta_max == 112, $sformatf("full schedule reaches beta 7.0 (got %0d/16)", beta_max));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // length of the default trial in cycles
  int full_cyc = 0;
  always @(posedge clk) if (busy1) full_cyc <= full_cyc + 1;
  always @(posedge clk) if (done1) begin
    checks++;
    if (full_cyc != 14 * 29984) begin failures++; $display("FAIL full trial %0d cycles", full_cyc); end
  end
endmodule

// rosc_tb -- checks that the ring oscillator runs at f_clk/(2*RING_SIZE*DELAY_FF)
// with a 50 % duty cycle, for three ring configurations, and restarts
// identically after reset.
module rosc_tb;
  logic clk = 1'b0;
  logic rst_n;
  int   checks = 0, failures = 0;
  always #1 clk = ~clk;

  logic [2:0] oc;
  rosc #(.RING_SIZE(9),  .DELAY_FF(1)) u0 (.clk(clk), .rst_n(rst_n), .rosc_clk(oc[0]));
  rosc #(.RING_SIZE(27), .DELAY_FF(1)) u1 (.clk(clk), .rst_n(rst_n), .rosc_clk(oc[1]));
  rosc #(.RING_SIZE(5),  .DELAY_FF(3)) u2 (.clk(clk), .rst_n(rst_n), .rosc_clk(oc[2]));
  localparam int HALF [3] = '{9, 27, 15};

  // per output: master cycles between successive edges
  int last_edge [3];
  int nedges [3];
  int cyc = 0;
  logic [2:0] prev;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    prev <= oc;
    if (rst_n) begin
      for (int k = 0; k < 3; k++) begin
        if (oc[k] != prev[k]) begin
          if (nedges[k] > 0) begin
            checks++;
            if (cyc - last_edge[k] != HALF[k]) begin
              failures++;
              $display("FAIL ring %0d: half period %0d, expected %0d", k, cyc - last_edge[k], HALF[k]);
            end
          end
          last_edge[k] = cyc;
          nedges[k]++;
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3; k++) begin nedges[k] = 0; last_edge[k] = 0; end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #0.5 rst_n = 1'b1;
    repeat (2000) @(posedge clk);
    for (int k = 0; k < 3; k++) begin
      checks++;
      // 2000 cycles / half period edges, give or take one
      if (nedges[k] < 2000 / HALF[k] - 1 || nedges[k] > 2000 / HALF[k] + 1) begin
        failures++;
        $display("FAIL ring %0d: %0d edges in 2000 cycles", k, nedges[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

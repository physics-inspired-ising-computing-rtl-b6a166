// freq_counter_tb -- drives ten synthetic clocks of known periods (toggling
// every H master cycles, H = 9, 11, ..., 27) and checks each measured count
// against the number of rising edges that fit in the gate, +-1.
module freq_counter_tb;
  localparam int GATE = 2000;
  logic clk = 1'b0, rst_n, start, valid;
  logic [9:0]  rc;
  logic [3:0]  sel;
  logic [15:0] count;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  freq_counter #(.N_ROSC(10), .GATE_CYCLES(GATE)) dut (
    .clk(clk), .rst_n(rst_n), .rosc_clks(rc), .sel(sel), .start(start), .count(count), .valid(valid));

  int tcnt [10];
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rc <= '0;
      for (int k = 0; k < 10; k++) tcnt[k] <= 0;
    end else begin
      for (int k = 0; k < 10; k++) begin
        if (tcnt[k] == 9 + 2 * k - 1) begin tcnt[k] <= 0; rc[k] <= ~rc[k]; end
        else tcnt[k] <= tcnt[k] + 1;
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
    int e;
    rst_n = 1'b0; start = 1'b0; sel = '0;
    #3 rst_n = 1'b1;
    for (int k = 0; k < 10; k++) begin
      @(negedge clk); sel = 4'(k); start = 1'b1;
      @(negedge clk); start = 1'b0; sel = 4'(9 - k);   // sel is captured at start
      while (!valid) @(negedge clk);
      e = GATE / (2 * (9 + 2 * k));
      checks++;
      if (int'(count) < e - 1 || int'(count) > e + 1) begin
        failures++; $display("FAIL rosc %0d: count %0d expected %0d", k, count, e);
      end
      @(negedge clk);
      checks++;
      if (valid) begin failures++; $display("FAIL valid longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

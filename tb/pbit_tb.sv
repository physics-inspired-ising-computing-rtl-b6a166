// pbit_tb -- holds beta and I fixed, clocks the p-bit a few thousand times
// and compares the fraction of +1 outputs with (1 + tanh(beta*I))/2. Also
// checks that en=0 freezes the state and that a p-bit updates only on its
// own clock edge.
module pbit_tb;
  import pbit_pkg::*;
  logic   pclk = 1'b0;
  logic   rst_n, en;
  beta_t  beta;
  field_t fld;
  logic   m;
  int checks = 0, failures = 0;

  pbit #(.SEED(32'hDEAD_BEEF)) dut (.pclk(pclk), .rst_n(rst_n), .en(en), .beta(beta),
                                    .i_field(fld), .m(m));

  task automatic tick();
    #1 pclk = 1'b1;
    #1 pclk = 1'b0;
  endtask

  // beta in 1/16 units, I in 1/256 units
  task automatic measure(input int b16, input int i256, input int n);
    int ones;
    real p, pe;
    beta = beta_t'(b16);
    fld  = field_t'(i256);
    ones = 0;
    for (int k = 0; k < n; k++) begin
      tick();
      ones += int'(m);
    end
    p  = real'(ones) / real'(n);
    pe = (1.0 + $tanh(real'(b16) / 16.0 * real'(i256) / 256.0)) / 2.0;
    checks++;
    if (p - pe > 0.04 || pe - p > 0.04) begin
      failures++;
      $display("FAIL beta=%0.3f I=%0.3f: P(+1)=%0.3f expected %0.3f",
               real'(b16) / 16.0, real'(i256) / 256.0, p, pe);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic held;
    rst_n = 1'b0; en = 1'b0; beta = '0; fld = '0;
    #2 rst_n = 1'b1;
    en = 1'b1;
    measure(16, 0, 4000);        // beta 1, I 0       -> 0.5
    measure(8, 256, 4000);       // beta 0.5, I 1     -> 0.731
    measure(16, -256, 4000);     // beta 1, I -1      -> 0.119
    measure(32, 128, 4000);      // beta 2, I 0.5     -> 0.881
    measure(16, -64, 4000);      // beta 1, I -0.25   -> 0.378
    measure(112, 512, 2000);     // beta 7, I 2       -> 1.0
    measure(112, -512, 2000);    // beta 7, I -2      -> 0.0
    // frozen when not enabled
    beta = beta_t'(16); fld = '0;
    en = 1'b0;
    held = m;
    for (int k = 0; k < 200; k++) begin
      tick();
      checks++;
      if (m !== held) failures++;
    end
    // state changes only at a clock edge
    en = 1'b1;
    fld = field_t'(-2048); beta = beta_t'(112);
    tick();
    fld = field_t'(2048);
    #1 checks++;
    if (m !== 1'b0) begin failures++; $display("FAIL m changed without a clock edge"); end
    tick();
    #1 checks++;
    if (m !== 1'b1) begin failures++; $display("FAIL m did not follow a strong field"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

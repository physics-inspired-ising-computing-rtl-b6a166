// tanh_lut_tb -- sweeps beta*I and compares the table output with tanh
// computed in real arithmetic at the quantised argument (within 1 LSB),
// checks odd symmetry and saturation.
module tanh_lut_tb;
  import pbit_pkg::*;
  bx_t  x;
  act_t y;
  int checks = 0, failures = 0;

  tanh_lut dut (.x(x), .y(y));

  function automatic int expect_of(longint xv);
    longint a;
    real    q, t;
    int     e;
    a = (xv < 0) ? -xv : xv;
    q = real'(a >> 7) / 32.0;          // |x| quantised down to 1/32
    if (q > 255.0 / 32.0) q = 255.0 / 32.0;
    t = $tanh(q) * 1024.0;
    e = int'($floor(t + 0.5));
    if (e > 1023) e = 1023;
    return (xv < 0) ? -e : e;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, d;
    for (longint xv = -(64 << 12); xv <= (64 << 12); xv += 37) begin
      x = bx_t'(xv);
      #1;
      e = expect_of(xv);
      d = int'(y) - e;
      checks++;
      if (d > 1 || d < -1) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d expected %0d", xv, y, e);
      end
    end
    // spot values
    x = '0; #1; checks++; if (y != 0) begin failures++; $display("FAIL tanh(0)=%0d", y); end
    x = bx_t'(4096); #1; checks++;   // tanh(1.0)*1024 = 779.9
    if (y < 779 || y > 781) begin failures++; $display("FAIL tanh(1)=%0d", y); end
    x = bx_t'(-4096); #1; checks++;
    if (y > -779 || y < -781) begin failures++; $display("FAIL tanh(-1)=%0d", y); end
    x = bx_t'(100 << 12); #1; checks++;
    if (y != 1023) begin failures++; $display("FAIL saturation %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

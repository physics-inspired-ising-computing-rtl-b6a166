// lfsr32_tb -- compares the LFSR with a reference model written as a
// Galois-free bit-by-bit recurrence, checks that en=0 holds the state, that
// the sequence does not repeat within 200000 steps and that bits are
// balanced.
module lfsr32_tb;
  logic        clk = 1'b0;
  logic        rst_n, en;
  logic [31:0] q;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  lfsr32 #(.SEED(32'h1234_5678)) dut (.clk(clk), .rst_n(rst_n), .en(en), .q(q));

  // reference: output bit sequence b[n+32] = b[n+32-32] ^ b[n+32-22] ^ b[n+32-2] ^ b[n+32-1]
  // expressed on the state word as taps 32,22,2,1 (1-based from the MSB end)
  function automatic logic [31:0] ref_step(logic [31:0] s);
    logic nb;
    nb = s[32-1] ^ s[22-1] ^ s[2-1] ^ s[1-1];
    return {s[30:0], nb};
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model, first;
    int ones;
    rst_n = 1'b0; en = 1'b0;
    repeat (2) @(posedge clk);
    #0.5 rst_n = 1'b1;
    checks++;
    if (q !== 32'h1234_5678) begin failures++; $display("FAIL seed %h", q); end
    model = q;
    first = q;
    en = 1'b1;
    ones = 0;
    for (int n = 0; n < 200000; n++) begin
      @(posedge clk); #0.5;
      model = ref_step(model);
      if (n < 5000) begin
        checks++;
        if (q !== model) begin failures++; if (failures < 5) $display("FAIL step %0d: %h vs %h", n, q, model); end
      end
      if (q == first) begin checks++; failures++; $display("FAIL repeated after %0d", n); end
      ones += int'(q[31]);
    end
    checks++;
    if (ones < 99000 || ones > 101000) begin failures++; $display("FAIL bit balance %0d", ones); end
    en = 1'b0;
    model = q;
    repeat (10) @(posedge clk);
    #0.5 checks++;
    if (q !== model) begin failures++; $display("FAIL en=0 did not hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

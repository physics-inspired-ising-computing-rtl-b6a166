// lfsr32 -- 32-bit Fibonacci linear feedback shift register, the
// pseudorandom number generator that each p-bit owns.
//
// Feedback polynomial x^32 + x^22 + x^2 + x + 1 (maximal length, period
// 2^32-1). The register shifts left by one bit on every enabled rising edge
// of clk, which in the p-computer is the p-bit's ring-oscillator clock. The
// paper names a 32-bit LFSR per p-bit; polynomial, shift direction and seed
// are this design's choices.
//
// Ports: clk, rst_n (async, loads SEED), en (step), q (current state).
module lfsr32 #(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] q
);
  logic fb;
  assign fb = q[31] ^ q[21] ^ q[1] ^ q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= {q[30:0], fb};
  end

  initial assert (SEED != '0) else $error("lfsr32: zero seed locks the LFSR");
endmodule

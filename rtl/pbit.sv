// pbit -- one probabilistic bit, m_i = sgn(tanh(beta*I_i) - r_U).
//
// On each rising edge of its own clock pclk (a ring-oscillator output) while
// en is high, the p-bit steps its 32-bit LFSR and samples a new state:
//   r_U = LFSR[31:21] read as a signed fraction in [-1, 1) (11 bits),
//   a   = tanh(beta * I) from tanh_lut (signed, 10 fraction bits),
//   m   = 1 (+1) if a > r_U, else 0 (-1),
// so P(m = +1) = (1 + tanh(beta*I))/2, the p-bit law of the paper. The
// product beta*I, the table and the comparison are combinational; only the
// LFSR and m are registered, in the pclk domain. beta and I arrive from
// other clock domains and are sampled as they stand at the edge, which is
// the asynchronous behaviour the paper studies. Which LFSR bits form r_U and
// the reset value of m (bit 0 of the seed) are this design's choices.
module pbit
  import pbit_pkg::*;
#(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic   pclk,
  input  logic   rst_n,
  input  logic   en,
  input  beta_t  beta,
  input  field_t i_field,
  output logic   m
);
  logic [31:0] rnd;
  bx_t         bx;
  act_t        act;
  act_t        r_u;

  lfsr32 #(.SEED(SEED)) u_lfsr (
    .clk(pclk), .rst_n(rst_n), .en(en), .q(rnd)
  );

  assign bx  = bx_t'(i_field) * bx_t'({1'b0, beta});
  assign r_u = act_t'($signed(rnd[31:21]));

  tanh_lut u_tanh (.x(bx), .y(act));

  always_ff @(posedge pclk or negedge rst_n) begin
    if (!rst_n)  m <= SEED[0];
    else if (en) m <= (act > r_u);
  end
endmodule

// rosc -- ring oscillator clock (ROSC) built from registered inverters.
//
// An odd ring of RING_SIZE inverters. As in the paper, each inverter drives
// a delay unit made of flip-flops clocked by the fast master clock (300 MHz),
// which makes the logical stage delay large and regular compared with wire
// delay. With DELAY_FF flip-flops per stage the single edge travelling round
// the ring needs RING_SIZE*DELAY_FF master cycles per half period, so
//     f_rosc = f_clk / (2 * RING_SIZE * DELAY_FF).
// Ring sizes 9, 11, ..., 27 at DELAY_FF = 1 give 16.7 .. 5.6 MHz, the range
// the paper reports. DELAY_FF is this design's knob for the "controllable
// delay"; the paper uses one flip-flop per inverter.
//
// Reset (asynchronous, active low) loads an alternating pattern so that
// exactly one transition circulates; an all-equal start would lock an odd
// ring of registered inverters into a period-2 oscillation. That reset
// pattern is this design's choice. rosc_clk is the last stage's register.
//
// Ports: clk (master clock), rst_n, rosc_clk (ROSC output, used as a clock).
module rosc #(
  parameter int unsigned RING_SIZE = 9,
  parameter int unsigned DELAY_FF  = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic rosc_clk
);
  localparam int unsigned NST = RING_SIZE * DELAY_FF;

  // stage[i] is flip-flop i of the ring. The flip-flop that ends an
  // inverter's delay unit (i % DELAY_FF == 0, counting from the input of the
  // delay chain) takes the inverted previous stage.
  logic [NST-1:0] stage;

  function automatic logic [NST-1:0] reset_pattern();
    logic [NST-1:0] p;
    for (int unsigned i = 0; i < NST; i++) p[i] = ((i / DELAY_FF) % 2) == 1;
    return p;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= reset_pattern();
    end else begin
      for (int unsigned i = 0; i < NST; i++) begin
        if (i == 0)                stage[i] <= ~stage[NST-1];
        else if (i % DELAY_FF == 0) stage[i] <= ~stage[i-1];
        else                        stage[i] <= stage[i-1];
      end
    end
  end

  assign rosc_clk = stage[NST-1];

  initial begin
    assert (RING_SIZE % 2 == 1) else $error("rosc: RING_SIZE must be odd");
  end
endmodule

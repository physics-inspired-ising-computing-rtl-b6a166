// tanh_lut -- activation table of the p-bit: y = tanh(x) for x = beta*I.
//
// x is signed with 12 fraction bits, y signed with 10 fraction bits. The
// magnitude |x| is quantised down to steps of 1/32 and looked up in a
// 256-entry ROM (pbit_pkg::TANH_TAB, entry k = round(1024*tanh(k/32)),
// capped at 1023); |x| >= 8 saturates to the last entry. The sign of x is
// applied afterwards (tanh is odd). Purely combinational. The paper gives
// only the function tanh(beta*I); the table form and its resolution are this
// design's choice.
module tanh_lut
  import pbit_pkg::*;
(
  input  bx_t  x,
  output act_t y
);
  localparam int IDX_W = $clog2(LUT_DEPTH);

  logic [W_BX-1:0]  mag;
  logic [IDX_W-1:0] idx;
  logic [A_FRAC-1:0] t;

  always_comb begin
    mag = x[W_BX-1] ? W_BX'(-x) : W_BX'(x);
    if ((mag >> LUT_STEP_SH) >= W_BX'(LUT_DEPTH)) idx = IDX_W'(LUT_DEPTH - 1);
    else                                          idx = IDX_W'(mag >> LUT_STEP_SH);
    t = TANH_TAB[idx];
    y = x[W_BX-1] ? -act_t'({1'b0, t}) : act_t'({1'b0, t});
  end
endmodule

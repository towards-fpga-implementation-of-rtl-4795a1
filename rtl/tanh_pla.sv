// tanh_pla -- hyperbolic tangent of a Q16.16 number, combinational.
//
// The LSTM layer uses tanh for its candidate value and for the cell output.
// It is built on the sigmoid approximation through tanh(x) = 2*sigmoid(2x)-1.
// The argument is clamped to +-8 before doubling (sigmoid is already flat
// there), so the doubling cannot overflow. The result lies in [-1, 1]; the
// largest error is about 0.04. tanh itself is the network's activation; the
// way it is computed is this design's choice.
//
// Interface: x in, y out, both nneq_pkg::fx_t; no clock, no latency.
module tanh_pla
  import nneq_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  localparam fx_t LIM = fx_t'(8 <<< FRAC);

  fx_t xc, x2, s;

  always_comb begin
    if (x > LIM)       xc = LIM;
    else if (x < -LIM) xc = -LIM;
    else               xc = x;
    x2 = xc <<< 1;
  end

  sigmoid_pla u_sig (.x(x2), .y(s));

  assign y = (s <<< 1) - FX_ONE;
endmodule

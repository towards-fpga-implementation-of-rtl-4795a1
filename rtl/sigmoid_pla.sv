// sigmoid_pla -- logistic sigmoid of a Q16.16 number, combinational.
//
// Used for the input, forget and output gates of every LSTM unit. The
// function is approximated by four straight segments on |x| (breakpoints 1,
// 2.375 and 5; slopes 1/4, 1/8 and 1/32), which need only shifts and adds:
//   |x| <  1      : 0.5     + |x|/4
//   |x| <  2.375  : 0.625   + |x|/8
//   |x| <  5      : 0.84375 + |x|/32
//   otherwise     : 1
// and sigmoid(-x) = 1 - sigmoid(x). The largest error is about 0.02.
// The network's gates use a sigmoid as in a standard LSTM; the segment
// approximation is this design's choice of hardware for it.
//
// Interface: x in, y out, both nneq_pkg::fx_t; no clock, no latency.
module sigmoid_pla
  import nneq_pkg::*;
(
  input  fx_t x,
  output fx_t y
);
  localparam logic [DATA_W:0] B1   = (DATA_W+1)'(1 <<< FRAC);           // 1.0
  localparam logic [DATA_W:0] B2   = (DATA_W+1)'(19 <<< (FRAC - 3));    // 2.375
  localparam logic [DATA_W:0] B5   = (DATA_W+1)'(5 <<< FRAC);           // 5.0
  localparam logic [DATA_W:0] C050 = (DATA_W+1)'(1 <<< (FRAC - 1));     // 0.5
  localparam logic [DATA_W:0] C062 = (DATA_W+1)'(5 <<< (FRAC - 3));     // 0.625
  localparam logic [DATA_W:0] C084 = (DATA_W+1)'(27 <<< (FRAC - 5));    // 0.84375

  logic [DATA_W:0] ax;   // |x|, one bit wider so that |min| fits
  logic [DATA_W:0] pos;  // sigmoid(|x|)

  always_comb begin
    ax = x[DATA_W-1] ? (DATA_W+1)'(-$signed({x[DATA_W-1], x})) : {1'b0, x};
    if (ax < B1)      pos = C050 + (ax >> 2);
    else if (ax < B2) pos = C062 + (ax >> 3);
    else if (ax < B5) pos = C084 + (ax >> 5);
    else              pos = B1;
    y = x[DATA_W-1] ? fx_t'(B1 - pos) : fx_t'(pos);
  end
endmodule

// nneq_pkg -- shared sizes, number format and weight address map of the
// biLSTM nonlinearity-mitigation equalizer.
//
// The equalizer maps a window of 81 received dual-polarization symbols
// (features XI, XQ, YI, YQ) through a bidirectional LSTM layer of 35 units
// per direction and a 1D convolution (2 filters, kernel 21, no padding) to
// 61 equalized symbols (XI, XQ). Those sizes are the published network's.
//
// Numbers are 32-bit two's complement fixed point. The network's weights are
// 32-bit integers in the original work; the split into 16 integer and 16
// fraction bits (Q16.16) is this design's choice. A multiply-accumulate adds
// floor(a*b / 2^FRAC) into a 64-bit accumulator, and a finished sum is
// saturated back to 32 bits.
//
// Weight address map (W_ADDR_W = 16 bits), this design's own:
//   [15:14] region : 0 forward LSTM, 1 backward LSTM, 2 output convolution
//   LSTM  : [13:8] unit j, [7:6] gate (0 i, 1 f, 2 g, 3 o), [5:0] input index
//           k (0..3 features, 4..38 recurrent h, 39 = bias)
//   conv  : [13] filter f, [12:8] tap k (0..20, 21 = bias), [7:0] channel c
//           (0..34 forward h, 35..69 backward h)
package nneq_pkg;

  // Network sizes
  localparam int NN_T_IN = 81;   // input symbols per window
  localparam int NN_FEAT = 4;   // XI, XQ, YI, YQ
  localparam int NN_H    = 35;   // LSTM units per direction
  localparam int NN_F    = 2;   // output filters (XI, XQ)
  localparam int NN_K    = 21;   // output kernel size
  localparam int NN_OUT  = NN_T_IN - NN_K + 1;  // 61 output symbols

  // Number format
  localparam int DATA_W = 32;
  localparam int FRAC   = 16;
  localparam int ACC_W  = 64;

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam fx_t FX_ONE = fx_t'(1 <<< FRAC);
  localparam fx_t FX_MAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam fx_t FX_MIN = {1'b1, {(DATA_W-1){1'b0}}};

  // LSTM gate order (as in TensorFlow)
  typedef enum logic [1:0] {GATE_I = 2'd0, GATE_F = 2'd1, GATE_G = 2'd2, GATE_O = 2'd3} gate_e;

  // Weight address map
  localparam int W_ADDR_W = 16;
  localparam int LSTM_AW  = 14;          // address bits inside one LSTM region
  localparam int CONV_AW  = 14;          // address bits inside the conv region
  typedef enum logic [1:0] {REG_FWD = 2'd0, REG_BWD = 2'd1, REG_CONV = 2'd2} wregion_e;

  // Saturate an accumulator to the 32-bit data format.
  function automatic fx_t fx_sat(input acc_t a);
    if (a > acc_t'(FX_MAX))      return FX_MAX;
    else if (a < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(a);
  endfunction

  // One product term, scaled back to the data format, full accumulator width.
  function automatic acc_t fx_term(input fx_t a, input fx_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return p >>> FRAC;
  endfunction

  // Saturating fixed-point multiply.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    return fx_sat(fx_term(a, b));
  endfunction

endpackage

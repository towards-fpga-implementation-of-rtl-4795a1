// lstm_unit -- one hidden unit of an LSTM layer, with its own weights.
//
// The unit keeps, for each of its four gates (i, f, g, o), one weight per
// input (N_IN features followed by the N_H recurrent outputs of the layer)
// and a bias, in a small local array written through the w_* port; one
// array word per input holds the weights of all four gates, so a MAC cycle
// needs a single read. It also keeps its cell state c and output h.
//
// One time step, driven by the owning lstm_direction:
//   acc_init          the four accumulators are loaded with the biases
//   mac_en x (N_IN+N_H) cycles: acc[g] += w[g][mac_idx] * mac_x, all four
//                     gates in the same cycle
//   upd_c             i = sig(acc_i), f = sig(acc_f), g = tanh(acc_g),
//                     o = sig(acc_o); c <= f*c + i*g; o is registered
//   upd_h             h <= o * tanh(c)
// clr_state zeroes h and c at the start of a window.
// The LSTM equations and the sigmoid/tanh activations are those of a
// standard (TensorFlow) LSTM cell as used by the published network; the
// one-input-per-cycle schedule and the local weight arrays are this
// design's choice.
module lstm_unit
  import nneq_pkg::*;
#(
  parameter int N_IN = nneq_pkg::NN_FEAT,
  parameter int N_H  = nneq_pkg::NN_H,
  localparam int NW  = N_IN + N_H + 1,          // weights per gate incl. bias
  localparam int IW  = $clog2(NW)
)(
  input  logic          clk,
  input  logic          rst_n,
  // weight load
  input  logic          w_en,
  input  logic [1:0]    w_gate,
  input  logic [IW-1:0] w_idx,
  input  fx_t           w_data,
  // time-step control
  input  logic          clr_state,
  input  logic          acc_init,
  input  logic          mac_en,
  input  logic [IW-1:0] mac_idx,
  input  fx_t           mac_x,
  input  logic          upd_c,
  input  logic          upd_h,
  output fx_t           h
);
  fx_t [3:0] wmem [NW];   // one word per input: the weights of the 4 gates
  acc_t acc  [4];
  fx_t  c_q, o_q, h_q;

  fx_t pre [4];
  fx_t [3:0] w_now, w_bias;
  assign w_now  = wmem[mac_idx];
  assign w_bias = wmem[NW-1];
  fx_t act_i, act_f, act_g, act_o, tanh_c;

  // weight store
  always_ff @(posedge clk) begin
    if (w_en && int'(w_idx) < NW) wmem[w_idx][w_gate] <= w_data;
  end

  // gate accumulators
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 4; g++) acc[g] <= '0;
    end else if (acc_init) begin
      for (int g = 0; g < 4; g++) acc[g] <= acc_t'(w_bias[g]);
    end else if (mac_en) begin
      for (int g = 0; g < 4; g++) acc[g] <= acc[g] + fx_term(w_now[g], mac_x);
    end
  end

  always_comb for (int g = 0; g < 4; g++) pre[g] = fx_sat(acc[g]);

  sigmoid_pla u_sig_i (.x(pre[GATE_I]), .y(act_i));
  sigmoid_pla u_sig_f (.x(pre[GATE_F]), .y(act_f));
  tanh_pla    u_tanh_g(.x(pre[GATE_G]), .y(act_g));
  sigmoid_pla u_sig_o (.x(pre[GATE_O]), .y(act_o));
  tanh_pla    u_tanh_c(.x(c_q),         .y(tanh_c));

  // cell state and output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= '0;
      o_q <= '0;
      h_q <= '0;
    end else if (clr_state) begin
      c_q <= '0;
      h_q <= '0;
    end else begin
      if (upd_c) begin
        c_q <= fx_sat(fx_term(act_f, c_q) + fx_term(act_i, act_g));
        o_q <= act_o;
      end
      if (upd_h) h_q <= fx_mul(o_q, tanh_c);
    end
  end

  assign h = h_q;

  // at most one step command per cycle
  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({clr_state, acc_init, mac_en, upd_c, upd_h}));
endmodule

// conv1d_output -- output layer of the equalizer: a 1D convolution.
//
// Computes, for every output position t = 0..N_OUT-1 and filter f,
//   y[t][f] = b[f] + sum_{k<N_K} sum_{c<N_CH} W[f][k][c] * H[t+k][c]
// over the N_CH = 70 concatenated hidden states H (forward units in channels
// 0..34, backward units in 35..69). No padding, so N_OUT = T_IN - N_K + 1
// (61 of 81); linear activation. The two filters give the equalized XI and XQ
// of the output symbol. Filter count, kernel size, channel count and the
// absence of padding are the published network's.
//
// Schedule (this design's choice): per output symbol, one cycle loads the
// biases, then one kernel tap per cycle, all channels of both filters in
// parallel (N_F*N_CH multipliers, one hidden row read per cycle), then the
// result is offered on out_*. A symbol takes N_K+2 cycles when the sink is
// ready (23 at the default sizes); while out_valid is high and out_ready low
// the engine stalls. out_last marks the final symbol of the window; done
// pulses when it is accepted.
//
// The weights are kept as one N_CH-word row per filter and tap, so a tap
// needs one wide read per filter, as from a block RAM of wide words.
// Weights arrive on w_*: w_addr[13] filter, [12:8] tap (N_K selects the
// bias, with channel 0), [7:0] channel, see nneq_pkg.
module conv1d_output
  import nneq_pkg::*;
#(
  parameter int T_IN = nneq_pkg::NN_T_IN,
  parameter int N_CH = 2 * nneq_pkg::NN_H,
  parameter int N_F  = nneq_pkg::NN_F,
  parameter int N_K  = nneq_pkg::NN_K,
  localparam int N_OUT = T_IN - N_K + 1,
  localparam int RW    = $clog2(T_IN),
  localparam int OW    = $clog2(N_OUT),
  localparam int KW    = $clog2(N_K + 1),
  localparam int CW    = $clog2(N_CH)
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  // weight load
  input  logic               w_en,
  input  logic [CONV_AW-1:0] w_addr,
  input  fx_t                w_data,
  // hidden-state read
  output logic [RW-1:0]      h_row,
  input  fx_t  [N_CH-1:0]    h_data,
  // output stream
  output logic               out_valid,
  input  logic               out_ready,
  output fx_t  [N_F-1:0]     out_data,
  output logic [OW-1:0]      out_idx,
  output logic               out_last
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_MAC, S_OUT} state_e;

  fx_t [N_CH-1:0] wmem [N_F][N_K];   // one row of all channels per filter and tap
  fx_t  bias [N_F];
  acc_t acc  [N_F];
  acc_t tap_sum [N_F];

  state_e        state;
  logic [OW-1:0] t;
  logic [KW-1:0] k;

  // weight store
  logic          w_f;
  logic [4:0]    w_k;
  logic [7:0]    w_c;
  assign w_f = w_addr[13];
  assign w_k = w_addr[12:8];
  assign w_c = w_addr[7:0];

  always_ff @(posedge clk) begin
    if (w_en && int'(w_f) < N_F) begin
      if (int'(w_k) < N_K && int'(w_c) < N_CH) wmem[w_f][w_k][w_c[CW-1:0]] <= w_data;
      else if (int'(w_k) == N_K && w_c == '0)  bias[w_f] <= w_data;
    end
  end

  // one kernel tap of every filter: N_CH products each
  fx_t [N_CH-1:0] wtap [N_F];
  always_comb begin
    for (int f = 0; f < N_F; f++) begin
      wtap[f]    = wmem[f][k];
      tap_sum[f] = '0;
      for (int c = 0; c < N_CH; c++)
        tap_sum[f] = tap_sum[f] + fx_term(wtap[f][c], h_data[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      t     <= '0;
      k     <= '0;
      for (int f = 0; f < N_F; f++) acc[f] <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_INIT;
          t     <= '0;
        end
        S_INIT: begin
          for (int f = 0; f < N_F; f++) acc[f] <= acc_t'(bias[f]);
          k     <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          for (int f = 0; f < N_F; f++) acc[f] <= acc[f] + tap_sum[f];
          if (int'(k) == N_K - 1) state <= S_OUT;
          else                    k <= k + 1'b1;
        end
        S_OUT: if (out_ready) begin
          if (int'(t) == N_OUT - 1) state <= S_IDLE;
          else begin
            t     <= t + 1'b1;
            state <= S_INIT;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign h_row     = RW'(int'(t) + int'(k));
  assign busy      = (state != S_IDLE);
  assign out_valid = (state == S_OUT);
  assign out_idx   = t;
  assign out_last  = (int'(t) == N_OUT - 1);
  assign done      = out_valid && out_ready && out_last;
  always_comb for (int f = 0; f < N_F; f++) out_data[f] = fx_sat(acc[f]);

  // an offered symbol stays put until it is taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_idx));
endmodule

// bilstm_equalizer -- biLSTM nonlinearity-mitigation equalizer, top level.
//
// Takes a window of T_IN = 81 received symbols (four features each: XI, XQ,
// YI, YQ after the standard receiver DSP) and returns the 61 central symbols
// of polarization X (XI, XQ) with the fiber nonlinearity partly undone:
//
//   in_* -> input_buffer [81 x 4]
//             |-> lstm_direction (forward,  35 units) -> hidden_buffer fwd
//             '-> lstm_direction (backward, 35 units) -> hidden_buffer bwd
//   hidden fwd ++ bwd [81 x 70] -> conv1d_output (2 filters, kernel 21) -> out_*
//
// The network (biLSTM of 35 units per direction, tanh, concatenation, Conv1D
// with 2 filters, kernel 21, no padding, linear output) is the published
// one. Everything about how it is scheduled is this design's own.
//
// Operation, one window at a time:
//   LOAD  in_ready is high; 81 symbols are taken on in_valid && in_ready
//   LSTM  both directions run at once: 81*43+1 cycles
//   CONV  61 output symbols, each N_K+2 = 23 cycles when out_ready is high;
//         a low out_ready stalls the engine. out_last marks symbol 60.
// Then LOAD again. Overlapping consecutive windows (81 in, 61 out, so 20
// symbols shared) is left to whoever feeds the input.
//
// Weights: write w_data to w_addr with w_en, any time no window is in
// flight (busy low). w_addr[15:14] picks the forward LSTM (0), the backward
// LSTM (1) or the output layer (2); the remaining fields are in nneq_pkg.
//
// Latency from the last input symbol to the first output: about 3500 cycles;
// a whole window: 81 + 3484 + 61*23 cycles, about 5000 cycles.
module bilstm_equalizer
  import nneq_pkg::*;
#(
  parameter int T_IN   = nneq_pkg::NN_T_IN,
  parameter int N_FEAT = nneq_pkg::NN_FEAT,
  parameter int N_H    = nneq_pkg::NN_H,
  parameter int N_F    = nneq_pkg::NN_F,
  parameter int N_K    = nneq_pkg::NN_K,
  localparam int N_OUT = T_IN - N_K + 1,
  localparam int RW    = $clog2(T_IN),
  localparam int OW    = $clog2(N_OUT)
)(
  input  logic                clk,
  input  logic                rst_n,
  // weight load
  input  logic                w_en,
  input  logic [W_ADDR_W-1:0] w_addr,
  input  fx_t                 w_data,
  // input symbols
  input  logic                in_valid,
  output logic                in_ready,
  input  fx_t  [N_FEAT-1:0]   in_data,
  // equalized symbols
  output logic                out_valid,
  input  logic                out_ready,
  output fx_t  [N_F-1:0]      out_data,
  output logic [OW-1:0]       out_idx,
  output logic                out_last,
  output logic                busy
);
  typedef enum logic [1:0] {S_LOAD, S_LSTM, S_CONV} state_e;

  state_e        state;
  logic [RW-1:0] in_row;
  logic          lstm_start, conv_start;
  logic          fwd_busy, bwd_busy, fwd_done, bwd_done, conv_busy, conv_done;
  logic          fwd_fin, bwd_fin;

  logic [RW-1:0]       fwd_xrow, bwd_xrow, fwd_hrow, bwd_hrow, conv_hrow;
  fx_t  [N_FEAT-1:0]   fwd_x, bwd_x;
  logic                fwd_hwe, bwd_hwe;
  fx_t  [N_H-1:0]      fwd_hw, bwd_hw, fwd_hr, bwd_hr;
  fx_t  [2*N_H-1:0]    h_cat;

  wregion_e w_region;
  assign w_region = wregion_e'(w_addr[15:14]);

  // ---------------- window sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_LOAD;
      in_row  <= '0;
      fwd_fin <= 1'b0;
      bwd_fin <= 1'b0;
    end else begin
      case (state)
        S_LOAD: if (in_valid) begin
          if (int'(in_row) == T_IN - 1) begin
            in_row <= '0;
            state  <= S_LSTM;
          end else begin
            in_row <= in_row + 1'b1;
          end
        end
        S_LSTM: begin
          if (fwd_done) fwd_fin <= 1'b1;
          if (bwd_done) bwd_fin <= 1'b1;
          if ((fwd_fin || fwd_done) && (bwd_fin || bwd_done)) begin
            fwd_fin <= 1'b0;
            bwd_fin <= 1'b0;
            state   <= S_CONV;
          end
        end
        S_CONV: if (conv_done) state <= S_LOAD;
        default: state <= S_LOAD;
      endcase
    end
  end

  // start pulses on the cycle after the state is entered
  logic lstm_go, conv_go;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstm_go <= 1'b0;
      conv_go <= 1'b0;
    end else begin
      lstm_go <= (state == S_LOAD) && in_valid && int'(in_row) == T_IN - 1;
      conv_go <= (state == S_LSTM) && (fwd_fin || fwd_done) && (bwd_fin || bwd_done);
    end
  end
  assign lstm_start = lstm_go;
  assign conv_start = conv_go;

  assign in_ready = (state == S_LOAD);
  assign busy     = (state != S_LOAD) || (in_row != '0);

  // ---------------- datapath ----------------
  input_buffer #(.T_IN(T_IN), .N_FEAT(N_FEAT)) u_in_buf (
    .clk     (clk),
    .we      (in_valid && in_ready),
    .wrow    (in_row),
    .wdata   (in_data),
    .rrow_a  (fwd_xrow),
    .rdata_a (fwd_x),
    .rrow_b  (bwd_xrow),
    .rdata_b (bwd_x)
  );

  lstm_direction #(.N_IN(N_FEAT), .N_H(N_H), .T_IN(T_IN), .REVERSE(1'b0)) u_lstm_fwd (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (lstm_start),
    .busy   (fwd_busy),
    .done   (fwd_done),
    .w_en   (w_en && w_region == REG_FWD),
    .w_addr (w_addr[LSTM_AW-1:0]),
    .w_data (w_data),
    .x_row  (fwd_xrow),
    .x_data (fwd_x),
    .h_we   (fwd_hwe),
    .h_row  (fwd_hrow),
    .h_data (fwd_hw)
  );

  lstm_direction #(.N_IN(N_FEAT), .N_H(N_H), .T_IN(T_IN), .REVERSE(1'b1)) u_lstm_bwd (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (lstm_start),
    .busy   (bwd_busy),
    .done   (bwd_done),
    .w_en   (w_en && w_region == REG_BWD),
    .w_addr (w_addr[LSTM_AW-1:0]),
    .w_data (w_data),
    .x_row  (bwd_xrow),
    .x_data (bwd_x),
    .h_we   (bwd_hwe),
    .h_row  (bwd_hrow),
    .h_data (bwd_hw)
  );

  hidden_buffer #(.T_IN(T_IN), .N_H(N_H)) u_hbuf_fwd (
    .clk (clk), .we (fwd_hwe), .wrow (fwd_hrow), .wdata (fwd_hw),
    .rrow (conv_hrow), .rdata (fwd_hr)
  );

  hidden_buffer #(.T_IN(T_IN), .N_H(N_H)) u_hbuf_bwd (
    .clk (clk), .we (bwd_hwe), .wrow (bwd_hrow), .wdata (bwd_hw),
    .rrow (conv_hrow), .rdata (bwd_hr)
  );

  // concatenation: forward units are channels 0..N_H-1, backward N_H..2N_H-1
  assign h_cat = {bwd_hr, fwd_hr};

  conv1d_output #(.T_IN(T_IN), .N_CH(2*N_H), .N_F(N_F), .N_K(N_K)) u_conv (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (conv_start),
    .busy      (conv_busy),
    .done      (conv_done),
    .w_en      (w_en && w_region == REG_CONV),
    .w_addr    (w_addr[CONV_AW-1:0]),
    .w_data    (w_data),
    .h_row     (conv_hrow),
    .h_data    (h_cat),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_data  (out_data),
    .out_idx   (out_idx),
    .out_last  (out_last)
  );

  // the LSTM directions and the output layer never run at the same time
  assert property (@(posedge clk) disable iff (!rst_n) !(conv_busy && (fwd_busy || bwd_busy)));
  // weights are only written between windows
  assert property (@(posedge clk) disable iff (!rst_n) w_en |-> !(fwd_busy || bwd_busy || conv_busy));
endmodule

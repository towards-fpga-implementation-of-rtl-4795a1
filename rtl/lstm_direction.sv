// lstm_direction -- one direction of the bidirectional LSTM layer.
//
// N_H lstm_units work side by side. For each of the T_IN time steps the
// controller
//   1. loads the gate biases into every unit           (1 cycle)
//   2. broadcasts the inputs one per cycle: the N_FEAT features of x_t,
//      then the N_H outputs h_{t-1} of the previous step  (N_IN+N_H cycles)
//   3. lets every unit update its cell state c           (1 cycle)
//   4. lets every unit compute its new output h           (1 cycle)
//   5. writes all h_t into the hidden-state buffer        (1 cycle)
// so a step takes N_IN+N_H+4 cycles (43 at the default sizes) and a window
// T_IN*(N_IN+N_H+4)+1 cycles from start to done. The forward direction
// (REVERSE=0) visits t = 0..T_IN-1, the backward one (REVERSE=1)
// t = T_IN-1..0; h and c start at zero for every window.
//
// Weights arrive on w_*: w_addr[13:8] unit, [7:6] gate, [5:0] input index
// (N_IN+N_H selects the bias), see nneq_pkg.
// Interfaces: start/busy/done; x_row/x_data reads the input buffer
// (combinational); h_we/h_row/h_data writes the hidden buffer.
// The bidirectional LSTM with 35 units is the published network; the
// schedule, the concurrency of the two directions and the zero initial
// state are this design's choices.
module lstm_direction
  import nneq_pkg::*;
#(
  parameter int N_IN    = nneq_pkg::NN_FEAT,
  parameter int N_H     = nneq_pkg::NN_H,
  parameter int T_IN    = nneq_pkg::NN_T_IN,
  parameter bit REVERSE = 1'b0,
  localparam int NW     = N_IN + N_H + 1,
  localparam int IW     = $clog2(NW),
  localparam int RW     = $clog2(T_IN)
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // weight load
  input  logic                 w_en,
  input  logic [LSTM_AW-1:0]   w_addr,
  input  fx_t                  w_data,
  // input buffer read
  output logic [RW-1:0]        x_row,
  input  fx_t  [N_IN-1:0]      x_data,
  // hidden buffer write
  output logic                 h_we,
  output logic [RW-1:0]        h_row,
  output fx_t  [N_H-1:0]       h_data
);
  typedef enum logic [2:0] {S_IDLE, S_CLR, S_INIT, S_MAC, S_UPDC, S_UPDH, S_WR} state_e;

  state_e        state;
  logic [RW-1:0] step;
  logic [IW-1:0] k;
  fx_t           mac_x;
  fx_t [N_H-1:0] h_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      step  <= '0;
      k     <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state <= S_CLR;
          step  <= '0;
        end
        S_CLR:  state <= S_INIT;
        S_INIT: begin
          state <= S_MAC;
          k     <= '0;
        end
        S_MAC: begin
          if (int'(k) == N_IN + N_H - 1) state <= S_UPDC;
          k <= k + 1'b1;
        end
        S_UPDC: state <= S_UPDH;
        S_UPDH: state <= S_WR;
        S_WR: begin
          if (int'(step) == T_IN - 1) state <= S_IDLE;
          else begin
            state <= S_INIT;
            step  <= step + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_WR) && (int'(step) == T_IN - 1);

  // time index of the current step in the window
  assign x_row = REVERSE ? RW'(T_IN - 1 - int'(step)) : step;
  assign h_row = x_row;

  // operand broadcast to all units: features first, then h_{t-1}
  always_comb begin
    if (int'(k) < N_IN) mac_x = x_data[k];
    else                mac_x = h_vec[int'(k) - N_IN];
  end

  for (genvar j = 0; j < N_H; j++) begin : g_unit
    lstm_unit #(.N_IN(N_IN), .N_H(N_H)) u_unit (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_en      (w_en && int'(w_addr[13:8]) == j),
      .w_gate    (w_addr[7:6]),
      .w_idx     (w_addr[IW-1:0]),
      .w_data    (w_data),
      .clr_state (state == S_CLR),
      .acc_init  (state == S_INIT),
      .mac_en    (state == S_MAC),
      .mac_idx   (k),
      .mac_x     (mac_x),
      .upd_c     (state == S_UPDC),
      .upd_h     (state == S_UPDH),
      .h         (h_vec[j])
    );
  end

  assign h_we   = (state == S_WR);
  assign h_data = h_vec;

  initial begin
    assert (N_H <= 64 && NW <= 64) else $error("address map holds at most 64 units and 63 inputs");
  end
endmodule

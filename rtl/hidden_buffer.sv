// hidden_buffer -- the hidden states of one LSTM direction for a whole window.
//
// One row per time step, each row holding the outputs h_t of all N_H units.
// The LSTM direction writes one row at the end of every time step; the
// output convolution reads whole rows. Two instances (forward and backward)
// together form the 70-channel concatenation the output layer sees. This is
// the memory the published implementation keeps in block RAM for the past
// and future recurrent states; its organisation (one wide row per time step,
// synchronous write, asynchronous read) is this design's choice.
module hidden_buffer
  import nneq_pkg::*;
#(
  parameter int T_IN = nneq_pkg::NN_T_IN,
  parameter int N_H  = nneq_pkg::NN_H,
  localparam int RW  = $clog2(T_IN)
)(
  input  logic              clk,
  input  logic              we,
  input  logic [RW-1:0]     wrow,
  input  fx_t  [N_H-1:0]    wdata,
  input  logic [RW-1:0]     rrow,
  output fx_t  [N_H-1:0]    rdata
);
  fx_t [N_H-1:0] mem [T_IN];

  always_ff @(posedge clk) begin
    if (we && int'(wrow) < T_IN) mem[wrow] <= wdata;
  end

  assign rdata = mem[rrow];
endmodule

// input_buffer -- the window of received symbols seen by the LSTM layer.
//
// Holds T_IN rows of N_FEAT features (XI, XQ, YI, YQ of one symbol per row).
// Rows are written one per cycle as symbols arrive; two independent
// asynchronous read ports let the forward LSTM walk the window from the
// first symbol while the backward LSTM walks it from the last one.
// The window size and features are the published network's input [81,4];
// the buffer itself and its two read ports are this design's choice.
//
// Timing: a write takes effect at the clock edge; reads are combinational.
module input_buffer
  import nneq_pkg::*;
#(
  parameter int T_IN   = nneq_pkg::NN_T_IN,
  parameter int N_FEAT = nneq_pkg::NN_FEAT,
  localparam int RW    = $clog2(T_IN)
)(
  input  logic                    clk,
  input  logic                    we,
  input  logic [RW-1:0]           wrow,
  input  fx_t  [N_FEAT-1:0]       wdata,
  input  logic [RW-1:0]           rrow_a,
  output fx_t  [N_FEAT-1:0]       rdata_a,
  input  logic [RW-1:0]           rrow_b,
  output fx_t  [N_FEAT-1:0]       rdata_b
);
  fx_t [N_FEAT-1:0] mem [T_IN];

  always_ff @(posedge clk) begin
    if (we && int'(wrow) < T_IN) mem[wrow] <= wdata;
  end

  assign rdata_a = mem[rrow_a];
  assign rdata_b = mem[rrow_b];
endmodule

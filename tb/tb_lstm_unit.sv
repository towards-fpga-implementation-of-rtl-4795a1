// tb_lstm_unit -- one LSTM unit against an integer reference model.
//
// Loads random weights and biases into all four gates, then runs several
// time steps with random inputs (acc_init, N_IN+N_H MAC cycles, upd_c,
// upd_h) and compares h after every step with the reference LSTM equations
// (i,f,o = sigmoid, g = tanh, c = f*c + i*g, h = o*tanh(c)). A mid-run
// clr_state must zero h and c. Default sizes (4 inputs, 35 recurrent).
module tb_lstm_unit;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  localparam int N_IN = 4;
  localparam int N_H  = 35;
  localparam int NW   = N_IN + N_H + 1;
  localparam int IW   = $clog2(NW);

  logic clk = 0, rst_n = 0;
  logic w_en = 0, clr_state = 0, acc_init = 0, mac_en = 0, upd_c = 0, upd_h = 0;
  logic [1:0] w_gate = 0;
  logic [IW-1:0] w_idx = 0, mac_idx = 0;
  fx_t w_data = 0, mac_x = 0, h;

  int checks = 0, failures = 0;
  longint W [4][NW];
  longint c_ref, h_ref;

  always #5 clk = ~clk;

  lstm_unit #(.N_IN(N_IN), .N_H(N_H)) dut (.*);

  task automatic run_step();
    longint acc [4];
    longint xv, ig, fg, gg, og;
    @(negedge clk) acc_init = 1;
    for (int g = 0; g < 4; g++) acc[g] = W[g][NW-1];
    @(negedge clk) acc_init = 0;
    for (int k = 0; k < N_IN + N_H; k++) begin
      xv = longint'(rnd(98304));
      mac_en = 1; mac_idx = IW'(k); mac_x = fx_t'(xv);
      for (int g = 0; g < 4; g++) acc[g] += term(W[g][k], xv);
      @(negedge clk);
    end
    mac_en = 0;
    upd_c = 1; @(negedge clk); upd_c = 0;
    upd_h = 1; @(negedge clk); upd_h = 0;
    ig = sigm(sat(acc[0])); fg = sigm(sat(acc[1]));
    gg = tanhf(sat(acc[2])); og = sigm(sat(acc[3]));
    c_ref = sat(term(fg, c_ref) + term(ig, gg));
    h_ref = sat(term(og, tanhf(c_ref)));
    checks++;
    if (longint'(h) != h_ref) begin
      failures++;
      $display("h mismatch: got %0d expected %0d", h, h_ref);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < NW; k++) begin
        W[g][k] = longint'(rnd(k == NW - 1 ? 32768 : 24000));
        @(negedge clk);
        w_en = 1; w_gate = 2'(g); w_idx = IW'(k); w_data = fx_t'(W[g][k]);
      end
    @(negedge clk) w_en = 0;
    c_ref = 0;
    clr_state = 1; @(negedge clk) clr_state = 0;
    for (int s = 0; s < 6; s++) run_step();
    checks++;
    if (h == 0) begin failures++; $display("h never left zero"); end
    clr_state = 1; @(negedge clk) clr_state = 0;
    checks++;
    if (h != 0) begin failures++; $display("clr_state did not zero h"); end
    c_ref = 0;
    for (int s = 0; s < 6; s++) run_step();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

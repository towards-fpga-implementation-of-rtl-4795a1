// tb_lstm_direction -- forward and backward LSTM directions against a
// reference LSTM layer.
//
// Reduced sizes (4 features, 5 units, 7 time steps). Both a forward and a
// backward instance are loaded with random weights and run on the same
// random window; every hidden row they write is compared with the
// reference, including the time order (backward starts at the last symbol).
// The busy time must be T*(N_IN+N_H+4)+1 cycles. Two windows are run to check
// that the state is cleared between windows.
module tb_lstm_direction;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  localparam int N_IN = 4;
  localparam int N_H  = 5;
  localparam int T    = 7;
  localparam int NW   = N_IN + N_H + 1;
  localparam int RW   = $clog2(T);

  logic clk = 0, rst_n = 0, start = 0;
  logic w_en = 0;
  logic [LSTM_AW-1:0] w_addr = 0;
  fx_t w_data = 0;

  logic [1:0]          busy, done, h_we;
  logic [RW-1:0]       x_row [2], h_row [2];
  fx_t  [N_IN-1:0]     x_data [2];
  fx_t  [N_H-1:0]      h_data [2];

  int checks = 0, failures = 0;
  int w_addr_dir = 0;
  longint W   [2][N_H][4][NW];
  longint X   [T][N_IN];
  longint H   [2][T][N_H];
  longint got [2][T][N_H];
  int     busy_cycles [2];

  always #5 clk = ~clk;

  for (genvar d = 0; d < 2; d++) begin : g_dir
    lstm_direction #(.N_IN(N_IN), .N_H(N_H), .T_IN(T), .REVERSE(d == 1)) dut (
      .clk(clk), .rst_n(rst_n), .start(start), .busy(busy[d]), .done(done[d]),
      .w_en(w_en && w_addr_dir == d), .w_addr(w_addr), .w_data(w_data),
      .x_row(x_row[d]), .x_data(x_data[d]),
      .h_we(h_we[d]), .h_row(h_row[d]), .h_data(h_data[d]));
    always_comb for (int f = 0; f < N_IN; f++) x_data[d][f] = fx_t'(X[x_row[d]][f]);
    always @(posedge clk) begin
      if (busy[d]) busy_cycles[d]++;
      if (h_we[d]) for (int j = 0; j < N_H; j++) got[d][h_row[d]][j] = longint'(h_data[d][j]);
    end
  end

  // reference bidirectional layer
  task automatic reference();
    for (int d = 0; d < 2; d++) begin
      longint c [N_H], hp [N_H], hn [N_H];
      for (int j = 0; j < N_H; j++) begin c[j] = 0; hp[j] = 0; end
      for (int s = 0; s < T; s++) begin
        int t;
        t = (d == 0) ? s : T - 1 - s;
        for (int j = 0; j < N_H; j++) begin
          longint acc [4];
          longint ig, fg, gg, og;
          for (int g = 0; g < 4; g++) begin
            acc[g] = W[d][j][g][NW-1];
            for (int k = 0; k < N_IN; k++) acc[g] += term(W[d][j][g][k], X[t][k]);
            for (int k = 0; k < N_H; k++)  acc[g] += term(W[d][j][g][N_IN+k], hp[k]);
          end
          ig = sigm(sat(acc[0])); fg = sigm(sat(acc[1]));
          gg = tanhf(sat(acc[2])); og = sigm(sat(acc[3]));
          c[j]  = sat(term(fg, c[j]) + term(ig, gg));
          hn[j] = sat(term(og, tanhf(c[j])));
        end
        for (int j = 0; j < N_H; j++) begin hp[j] = hn[j]; H[d][t][j] = hn[j]; end
      end
    end
  endtask

  task automatic run_window();
    for (int t = 0; t < T; t++) for (int k = 0; k < N_IN; k++) X[t][k] = longint'(rnd(98304));
    reference();
    busy_cycles[0] = 0; busy_cycles[1] = 0;
    for (int d = 0; d < 2; d++) for (int t = 0; t < T; t++) for (int j = 0; j < N_H; j++) got[d][t][j] = -1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (busy == 2'b00);
    @(negedge clk);
    for (int d = 0; d < 2; d++) begin
      checks++;
      if (busy_cycles[d] != T * (N_IN + N_H + 4) + 1) begin
        failures++;
        $display("dir %0d busy %0d cycles, expected %0d", d, busy_cycles[d], T * (N_IN + N_H + 4) + 1);
      end
      for (int t = 0; t < T; t++) for (int j = 0; j < N_H; j++) begin
        checks++;
        if (got[d][t][j] != H[d][t][j]) begin
          failures++;
          if (failures < 10) $display("dir %0d t %0d unit %0d: got %0d expected %0d", d, t, j, got[d][t][j], H[d][t][j]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d < 2; d++)
      for (int j = 0; j < N_H; j++)
        for (int g = 0; g < 4; g++)
          for (int k = 0; k < NW; k++) begin
            W[d][j][g][k] = longint'(rnd(k == NW - 1 ? 32768 : 30000));
            @(negedge clk);
            w_en = 1; w_addr_dir = d;
            w_addr = {6'(j), 2'(g), 6'(k)};
            w_data = fx_t'(W[d][j][g][k]);
          end
    @(negedge clk) w_en = 0;
    run_window();
    run_window();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_bilstm_equalizer -- the whole equalizer at its full size, end to end.
//
// All parameters are at their defaults (81-symbol window, 35 units per LSTM
// direction, 2 output filters of kernel 21). The testbench loads random
// weights into all three weight regions, then sends three windows of random
// 16QAM-like soft symbols with random gaps on the input and random
// back-pressure on the output, and compares all 61 x 2 outputs of every
// window with a reference model of the whole network (bidirectional LSTM,
// concatenation, convolution) in the same fixed-point arithmetic.
// It also checks the latency from the last input symbol to the first output
// (T*(N_IN+N_H+4) + N_K + 5 cycles with a ready sink) and counts the events
// the design has to handle: weight writes per region, input held off while
// a window is in flight, output stalls, windows completed.
module tb_bilstm_equalizer;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  localparam int T    = NN_T_IN;
  localparam int NI   = NN_FEAT;
  localparam int NH   = NN_H;
  localparam int NF   = NN_F;
  localparam int NK   = NN_K;
  localparam int NOUT = T - NK + 1;
  localparam int NW   = NI + NH + 1;
  localparam int NCH  = 2 * NH;
  localparam int NWIN = 3;
  localparam int LATENCY = T * (NI + NH + 4) + NK + 5;

  logic clk = 0, rst_n = 0;
  logic w_en = 0;
  logic [W_ADDR_W-1:0] w_addr = 0;
  fx_t w_data = 0;
  logic in_valid = 0, in_ready;
  fx_t [NI-1:0] in_data = '0;
  logic out_valid, out_ready = 0, out_last, busy;
  fx_t [NF-1:0] out_data;
  logic [$clog2(NOUT)-1:0] out_idx;

  bilstm_equalizer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint WL [2][NH][4][NW];
  longint WC [NF][NK][NCH];
  longint BC [NF];
  longint X  [NWIN][T][NI];
  longint Y  [NWIN][NOUT][NF];

  // event counters
  int n_wr [3];
  int n_in_held = 0, n_in_gap = 0, n_out_stall = 0, n_windows = 0, n_last = 0;
  int win_out = 0, nout = 0;
  int cyc = 0, c_last_in = 0, lat_checked = 0;

  // -------- reference network --------
  task automatic reference(input int w);
    longint H [T][NCH];
    for (int d = 0; d < 2; d++) begin
      longint c [NH], hp [NH], hn [NH];
      for (int j = 0; j < NH; j++) begin c[j] = 0; hp[j] = 0; end
      for (int s = 0; s < T; s++) begin
        int t;
        t = (d == 0) ? s : T - 1 - s;
        for (int j = 0; j < NH; j++) begin
          longint acc [4];
          longint ig, fg, gg, og;
          for (int g = 0; g < 4; g++) begin
            acc[g] = WL[d][j][g][NW-1];
            for (int k = 0; k < NI; k++) acc[g] += term(WL[d][j][g][k], X[w][t][k]);
            for (int k = 0; k < NH; k++) acc[g] += term(WL[d][j][g][NI+k], hp[k]);
          end
          ig = sigm(sat(acc[0])); fg = sigm(sat(acc[1]));
          gg = tanhf(sat(acc[2])); og = sigm(sat(acc[3]));
          c[j]  = sat(term(fg, c[j]) + term(ig, gg));
          hn[j] = sat(term(og, tanhf(c[j])));
        end
        for (int j = 0; j < NH; j++) begin hp[j] = hn[j]; H[t][d*NH+j] = hn[j]; end
      end
    end
    for (int t = 0; t < NOUT; t++) for (int f = 0; f < NF; f++) begin
      longint a;
      a = BC[f];
      for (int k = 0; k < NK; k++) for (int ch = 0; ch < NCH; ch++) a += term(WC[f][k][ch], H[t+k][ch]);
      Y[w][t][f] = sat(a);
    end
  endtask

  task automatic wr(input int region, input logic [13:0] a, input longint v);
    @(negedge clk);
    w_en = 1; w_addr = {2'(region), a}; w_data = fx_t'(v);
    n_wr[region]++;
  endtask

  // -------- monitor --------
  always @(posedge clk) begin
    cyc++;
    if (in_valid && !in_ready) n_in_held++;
    if (in_valid && in_ready && dut.in_row == $clog2(T)'(T - 1)) c_last_in = cyc;
    if (out_valid && !out_ready) n_out_stall++;
    if (out_valid && out_ready) begin
      if (nout == 0 && win_out == 0) begin
        checks++;
        lat_checked++;
        if (cyc - c_last_in != LATENCY) begin
          failures++;
          $display("latency %0d cycles, expected %0d", cyc - c_last_in, LATENCY);
        end
      end
      for (int f = 0; f < NF; f++) begin
        checks++;
        if (longint'(out_data[f]) != Y[win_out][nout][f]) begin
          failures++;
          if (failures < 10) $display("window %0d out %0d f %0d: got %0d expected %0d",
                                      win_out, nout, f, out_data[f], Y[win_out][nout][f]);
        end
      end
      checks++;
      if (int'(out_idx) != nout) begin failures++; $display("index %0d expected %0d", out_idx, nout); end
      if (out_last) n_last++;
      nout++;
      if (nout == NOUT) begin
        checks++;
        if (!out_last) begin failures++; $display("out_last missing"); end
        nout = 0;
        win_out++;
        n_windows++;
      end
    end
  end

  // output sink: ready all the time for window 0, random afterwards
  always @(negedge clk) out_ready <= (win_out != 0) ? ($urandom_range(0, 3) != 0) : 1'b1;

  initial begin
    n_wr[0] = 0; n_wr[1] = 0; n_wr[2] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights
    for (int d = 0; d < 2; d++)
      for (int j = 0; j < NH; j++)
        for (int g = 0; g < 4; g++)
          for (int k = 0; k < NW; k++) begin
            WL[d][j][g][k] = longint'(rnd(k == NW - 1 ? 32768 : 12000));
            wr(d, {6'(j), 2'(g), 6'(k)}, WL[d][j][g][k]);
          end
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < NK; k++) for (int ch = 0; ch < NCH; ch++) begin
        WC[f][k][ch] = longint'(rnd(6000));
        wr(2, {1'(f), 5'(k), 8'(ch)}, WC[f][k][ch]);
      end
      BC[f] = longint'(rnd(20000));
      wr(2, {1'(f), 5'(NK), 8'd0}, BC[f]);
    end
    @(negedge clk) w_en = 0;
    // windows
    for (int w = 0; w < NWIN; w++) begin
      for (int t = 0; t < T; t++) for (int k = 0; k < NI; k++) X[w][t][k] = longint'(rnd(98304));
      reference(w);
    end
    for (int w = 0; w < NWIN; w++) begin
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        if (w == 2 && $urandom_range(0, 3) == 0) begin
          in_valid = 0;
          n_in_gap++;
          @(negedge clk);
        end
        in_valid = 1;
        for (int k = 0; k < NI; k++) in_data[k] = fx_t'(X[w][t][k]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      // the next window's symbols follow at once and are held off while
      // this window is in flight
    end
    @(negedge clk) in_valid = 0;
    wait (n_windows == NWIN);
    repeat (5) @(negedge clk);
    // mechanisms that must have happened
    for (int r = 0; r < 3; r++) begin
      checks++;
      if (n_wr[r] == 0) begin failures++; $display("no weight writes to region %0d", r); end
    end
    checks += 6;
    if (n_in_gap == 0)    begin failures++; $display("no gap in the input stream"); end
    if (n_in_held == 0)   begin failures++; $display("input was never held off"); end
    if (n_out_stall == 0) begin failures++; $display("output never stalled"); end
    if (n_last != NWIN)   begin failures++; $display("out_last seen %0d times", n_last); end
    if (lat_checked != 1) begin failures++; $display("latency not measured"); end
    if (busy)             begin failures++; $display("busy after the last window"); end
    $display("weight writes fwd/bwd/conv = %0d/%0d/%0d, input gaps %0d, input held %0d cycles, output stalled %0d cycles, windows %0d",
             n_wr[0], n_wr[1], n_wr[2], n_in_gap, n_in_held, n_out_stall, n_windows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

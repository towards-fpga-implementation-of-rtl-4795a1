// tb_conv1d_output -- the output convolution against a reference.
//
// Reduced sizes (10 rows, 6 channels, 2 filters, kernel 4, so 7 outputs).
// Random weights, biases and hidden rows. The first window runs with the
// sink always ready and must take exactly 1 + N_OUT*(N_K+2) cycles from
// start to done; the second window has random back-pressure, during which
// the offered symbol must hold. Every symbol, its index and out_last are
// checked.
module tb_conv1d_output;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  localparam int T     = 10;
  localparam int NCH   = 6;
  localparam int NF    = 2;
  localparam int NK    = 4;
  localparam int NOUT  = T - NK + 1;
  localparam int RW    = $clog2(T);
  localparam int OW    = $clog2(NOUT);

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic w_en = 0;
  logic [CONV_AW-1:0] w_addr = 0;
  fx_t w_data = 0;
  logic [RW-1:0] h_row;
  fx_t [NCH-1:0] h_data;
  logic out_valid, out_ready = 1, out_last;
  fx_t [NF-1:0] out_data;
  logic [OW-1:0] out_idx;

  int checks = 0, failures = 0, stalls = 0, nout = 0;
  longint W [NF][NK][NCH];
  longint B [NF];
  longint Hm [T][NCH];
  longint Y [NOUT][NF];
  int cycles;
  logic stall_mode = 0;

  always #5 clk = ~clk;

  conv1d_output #(.T_IN(T), .N_CH(NCH), .N_F(NF), .N_K(NK)) dut (.*);

  always_comb for (int c = 0; c < NCH; c++) h_data[c] = fx_t'(Hm[h_row][c]);

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      for (int f = 0; f < NF; f++) begin
        checks++;
        if (longint'(out_data[f]) != Y[out_idx][f]) begin
          failures++;
          $display("out %0d f %0d: got %0d expected %0d", out_idx, f, out_data[f], Y[out_idx][f]);
        end
      end
      checks += 2;
      if (int'(out_idx) != nout)                 begin failures++; $display("index %0d, expected %0d", out_idx, nout); end
      if (out_last != (nout == NOUT - 1))        begin failures++; $display("out_last wrong at %0d", nout); end
      nout++;
    end
    if (out_valid && !out_ready) stalls++;
  end

  // hold check during back-pressure
  fx_t [NF-1:0] held;
  logic was_stalled = 0;
  always @(posedge clk) begin
    if (was_stalled) begin
      checks++;
      if (!out_valid || out_data != held) begin failures++; $display("output changed during stall"); end
    end
    was_stalled <= out_valid && !out_ready;
    held <= out_data;
  end

  int cyc = 0, c_start = 0, c_done = 0;
  always @(posedge clk) begin
    cyc++;
    if (start) c_start = cyc;
    if (done)  c_done  = cyc;
  end
  always @(negedge clk) out_ready <= stall_mode ? ($urandom_range(0, 2) == 0) : 1'b1;

  task automatic run_window(input logic stall);
    for (int t = 0; t < T; t++) for (int c = 0; c < NCH; c++) Hm[t][c] = longint'(rnd(65536));
    for (int t = 0; t < NOUT; t++) for (int f = 0; f < NF; f++) begin
      longint a;
      a = B[f];
      for (int k = 0; k < NK; k++) for (int c = 0; c < NCH; c++) a += term(W[f][k][c], Hm[t+k][c]);
      Y[t][f] = sat(a);
    end
    nout = 0;
    stall_mode = stall;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (nout == NOUT);
    @(negedge clk);
    cycles = c_done - c_start + 1;
    checks++;
    if (nout != NOUT) begin failures++; $display("%0d outputs, expected %0d", nout, NOUT); end
    if (!stall) begin
      checks++;
      if (cycles != 1 + NOUT * (NK + 2)) begin
        failures++;
        $display("window took %0d cycles, expected %0d", cycles, 1 + NOUT * (NK + 2));
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < NK; k++) for (int c = 0; c < NCH; c++) begin
        W[f][k][c] = longint'(rnd(40000));
        @(negedge clk);
        w_en = 1; w_addr = {1'(f), 5'(k), 8'(c)}; w_data = fx_t'(W[f][k][c]);
      end
      B[f] = longint'(rnd(30000));
      @(negedge clk);
      w_en = 1; w_addr = {1'(f), 5'(NK), 8'd0}; w_data = fx_t'(B[f]);
    end
    @(negedge clk) w_en = 0;
    run_window(1'b0);
    run_window(1'b1);
    checks++;
    if (stalls == 0) begin failures++; $display("no back-pressure happened"); end
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

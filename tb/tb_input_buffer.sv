// tb_input_buffer -- writes a random window into the input buffer and reads
// it back through both read ports, port A in time order and port B in
// reverse order at the same time, as the two LSTM directions do.
module tb_input_buffer;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  localparam int T  = 81;
  localparam int NF = 4;
  localparam int RW = $clog2(T);

  logic clk = 0, we = 0;
  logic [RW-1:0] wrow = 0, rrow_a = 0, rrow_b = 0;
  fx_t [NF-1:0] wdata, rdata_a, rdata_b;
  int checks = 0, failures = 0;
  int M [T][NF];

  always #5 clk = ~clk;

  input_buffer #(.T_IN(T), .N_FEAT(NF)) dut (.*);

  initial begin
    wdata = '0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        we = 1; wrow = RW'(t);
        for (int f = 0; f < NF; f++) begin M[t][f] = rnd(100000); wdata[f] = fx_t'(M[t][f]); end
      end
      @(negedge clk) we = 0;
      for (int t = 0; t < T; t++) begin
        rrow_a = RW'(t); rrow_b = RW'(T - 1 - t);
        #1;
        for (int f = 0; f < NF; f++) begin
          checks += 2;
          if (rdata_a[f] != fx_t'(M[t][f]))         begin failures++; $display("A row %0d f %0d", t, f); end
          if (rdata_b[f] != fx_t'(M[T-1-t][f]))     begin failures++; $display("B row %0d f %0d", T-1-t, f); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

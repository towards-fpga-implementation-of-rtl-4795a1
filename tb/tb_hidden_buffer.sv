// tb_hidden_buffer -- writes hidden-state rows in backward time order, as
// the backward LSTM does, and reads every row back in forward order.
module tb_hidden_buffer;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  localparam int T  = 81;
  localparam int NH = 35;
  localparam int RW = $clog2(T);

  logic clk = 0, we = 0;
  logic [RW-1:0] wrow = 0, rrow = 0;
  fx_t [NH-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  int M [T][NH];

  always #5 clk = ~clk;

  hidden_buffer #(.T_IN(T), .N_H(NH)) dut (.*);

  initial begin
    wdata = '0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int t = T - 1; t >= 0; t--) begin
        @(negedge clk);
        we = 1; wrow = RW'(t);
        for (int j = 0; j < NH; j++) begin M[t][j] = rnd(70000); wdata[j] = fx_t'(M[t][j]); end
      end
      @(negedge clk) we = 0;
      for (int t = 0; t < T; t++) begin
        rrow = RW'(t);
        #1;
        for (int j = 0; j < NH; j++) begin
          checks++;
          if (rdata[j] != fx_t'(M[t][j])) begin failures++; if (failures < 10) $display("row %0d unit %0d", t, j); end
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

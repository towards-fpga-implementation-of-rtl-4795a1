// tb_sigmoid_pla -- checks the segment sigmoid against a bit-exact integer
// model over a dense sweep of [-10, 10], random and extreme arguments, and
// checks that it stays within 0.02 of the exact logistic function.
module tb_sigmoid_pla;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  fx_t x, y;
  int checks = 0, failures = 0;

  sigmoid_pla dut (.x(x), .y(y));

  task automatic check_one(input int xv);
    longint exp_v;
    real err;
    x = xv;
    #1;
    exp_v = sigm(longint'(xv));
    checks++;
    if (longint'(y) != exp_v) begin
      failures++;
      if (failures < 10) $display("sigmoid(%0d): got %0d expected %0d", xv, y, exp_v);
    end
    err = to_real(longint'(y)) - sigm_real(to_real(longint'(xv)));
    checks++;
    if (err > 0.02 || err < -0.02) begin
      failures++;
      if (failures < 10) $display("sigmoid(%f): error %f", to_real(longint'(xv)), err);
    end
  endtask

  initial begin
    for (int v = -10 * 65536; v <= 10 * 65536; v += 997) check_one(v);
    for (int i = 0; i < 2000; i++) check_one(int'($urandom));
    check_one(0);
    check_one(65536);  check_one(-65536);
    check_one(155648); check_one(-155648);
    check_one(327680); check_one(-327680);
    check_one(32'sh7fffffff);
    check_one(32'sh80000000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

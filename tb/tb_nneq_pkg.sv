// tb_nneq_pkg -- checks the package's fixed-point helpers (fx_term, fx_sat,
// fx_mul) against the integer reference for random and extreme operands,
// including products that must saturate.
module tb_nneq_pkg;
  import nneq_pkg::*;
  import nneq_ref_pkg::*;

  int checks = 0, failures = 0;

  task automatic check_pair(input int a, input int b);
    longint t_ref, m_ref;
    t_ref = term(longint'(a), longint'(b));
    m_ref = sat(t_ref);
    checks += 2;
    if (longint'(fx_term(fx_t'(a), fx_t'(b))) != t_ref) begin
      failures++; if (failures < 10) $display("fx_term(%0d,%0d) = %0d, expected %0d", a, b, fx_term(fx_t'(a), fx_t'(b)), t_ref);
    end
    if (longint'(fx_mul(fx_t'(a), fx_t'(b))) != m_ref) begin
      failures++; if (failures < 10) $display("fx_mul(%0d,%0d) = %0d, expected %0d", a, b, fx_mul(fx_t'(a), fx_t'(b)), m_ref);
    end
  endtask

  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 3000; i++) check_pair(rnd(300000), rnd(300000));
    for (int i = 0; i < 3000; i++) check_pair(int'($urandom), int'($urandom));
    check_pair(32'sh7fffffff, 32'sh7fffffff);
    check_pair(32'sh80000000, 32'sh80000000);
    check_pair(32'sh80000000, 32'sh7fffffff);
    check_pair(-1, 1);
    check_pair(-3, 65535);
    for (int i = 0; i < 2000; i++) begin
      longint v;
      v = longint'($urandom) * longint'($urandom) - 64'sd4611686018427387904;
      checks++;
      if (longint'(fx_sat(acc_t'(v))) != sat(v)) begin failures++; $display("fx_sat(%0d)", v); end
    end
    checks++;
    if (FX_ONE != fx_t'(65536)) begin failures++; $display("FX_ONE wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

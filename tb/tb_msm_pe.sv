// tb_msm_pe: msm_pe under the three dispatch policies (round robin, Max-r,
// longest queue). Every policy must produce the same, correct window sums;
// the test also requires that queue-full stalls happened.
module tb_msm_pe;
  import szkp_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int c [3], f [3], st [3], bu [3];
  logic d [3];
  int checks, failures;

  tb_pe_run #(.POLICY(POL_RR))   r0 (.clk, .rst, .checks(c[0]), .failures(f[0]), .stalls(st[0]), .bubbles(bu[0]), .done(d[0]));
  tb_pe_run #(.POLICY(POL_MAXR)) r1 (.clk, .rst, .checks(c[1]), .failures(f[1]), .stalls(st[1]), .bubbles(bu[1]), .done(d[1]));
  tb_pe_run #(.POLICY(POL_LQ))   r2 (.clk, .rst, .checks(c[2]), .failures(f[2]), .stalls(st[2]), .bubbles(bu[2]), .done(d[2]));

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (d[0] && d[1] && d[2]);
    checks = c[0] + c[1] + c[2] + 3;
    failures = f[0] + f[1] + f[2];
    for (int i = 0; i < 3; i++) begin
      $display("policy %0d: stalls=%0d bubbles=%0d", i, st[i], bu[i]);
      if (st[i] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end
endmodule

// tb_sparse_msm_core: runs the sparse MSM core for G1 (EXT = 1, PADD
// latency 30) and G2 (EXT = 2, PADD latency 55) side by side with
// tb_sparse_run, sums their results and requires that every path
// (dropped pair, scalar-1 pair, Pippenger pair, buffer fold) was exercised.
module tb_sparse_msm_core;
  logic clk = 0;
  always #5 clk = ~clk;
  logic d1, d2;
  int c1, f1, z1, o1, n1, g1, c2, f2, z2, o2, n2, g2;
  int checks, failures;

  tb_sparse_run #(.EXT(1), .PADD_LAT(30)) u_g1 (.clk, .done(d1), .checks(c1), .failures(f1),
    .n_zero(z1), .n_one(o1), .n_dense(n1), .n_fold(g1));
  tb_sparse_run #(.EXT(2), .PADD_LAT(55)) u_g2 (.clk, .done(d2), .checks(c2), .failures(f2),
    .n_zero(z2), .n_one(o2), .n_dense(n2), .n_fold(g2));

  initial begin
    wait (d1 && d2);
    @(posedge clk);
    checks = c1 + c2 + 2; failures = f1 + f2;
    $display("G1: zero=%0d one=%0d dense=%0d fold=%0d", z1, o1, n1, g1);
    $display("G2: zero=%0d one=%0d dense=%0d fold=%0d", z2, o2, n2, g2);
    if (z1 == 0 || o1 == 0 || n1 == 0 || g1 == 0) begin failures++; $display("G1 path unused"); end
    if (z2 == 0 || o2 == 0 || n2 == 0 || g2 == 0) begin failures++; $display("G2 path unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1);
    $finish;
  end
endmodule

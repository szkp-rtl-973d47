// tb_ec_padd: self-checking test of the point adder for G1 and G2, each with
// a fully pipelined (II=1) and a folded (II=4) configuration, at the paper's
// 254-bit latencies (30 cycles G1, 55 cycles G2).
module tb_ec_padd;
  import szkp_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int c [4], f [4];
  logic d [4];
  int checks, failures;

  tb_padd_run #(.EXT(1), .II(1), .LAT(G1_PADD_LAT)) r0 (.clk, .rst, .checks(c[0]), .failures(f[0]), .done(d[0]));
  tb_padd_run #(.EXT(1), .II(4), .LAT(G1_PADD_LAT)) r1 (.clk, .rst, .checks(c[1]), .failures(f[1]), .done(d[1]));
  tb_padd_run #(.EXT(2), .II(1), .LAT(G2_PADD_LAT)) r2 (.clk, .rst, .checks(c[2]), .failures(f[2]), .done(d[2]));
  tb_padd_run #(.EXT(2), .II(4), .LAT(G2_PADD_LAT)) r3 (.clk, .rst, .checks(c[3]), .failures(f[3]), .done(d[3]));

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    wait (d[0] && d[1] && d[2] && d[3]);
    @(posedge clk);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end
endmodule

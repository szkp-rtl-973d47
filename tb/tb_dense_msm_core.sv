// tb_dense_msm_core: dense MSM at reduced size (4 PEs, 4-bit windows,
// 32-bit scalars, 16 points per batch) so that an MSM spans two batches and
// eight windows (two window slots per PE). Two MSMs are run back to back:
// 23 points ending with ld_last on the last element, then 3 points closed by
// an empty ld_last beat. Expected values: sum s_j a_j G via the affine
// reference, with P_j = a_j G.
module tb_dense_msm_core;
  import szkp_pkg::*;
  import tb_ec_ref::*;
  localparam int KM = 4, W = 4, PPW = 16, SB = 32;
  typedef logic [2:0][0:0][FW-1:0] pt_t;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, batches = 0, stalls = 0, issues = 0;

  logic ld_valid, ld_ready, ld_keep, ld_last, res_valid, busy, ev_batch;
  fe_t  ld_scalar;
  pt_t  ld_point, res_point;
  logic [KM-1:0] ev_stall, ev_bubble, ev_issue;

  dense_msm_core #(.EXT(1), .KM(KM), .W(W), .PPW(PPW), .II(1), .D(2), .POLICY(POL_LQ),
                   .PADD_LAT(30), .SBITS(SB)) dut (.*);

  always_ff @(posedge clk) begin
    if (ev_batch) batches <= batches + 1;
    stalls <= stalls + $countones(ev_stall);
    issues <= issues + $countones(ev_issue);
  end

  task automatic run_msm(int n, bit empty_end);
    apt_t g;
    u256 k;
    logic [1535:0] t, v;
    int a;
    fe_t s;
    g = g1_gen();
    k = 0;
    for (int e = 0; e < n + (empty_end ? 1 : 0); e++) begin
      s = fe_t'($urandom);
      if (e % 2 == 0) s = s & 256'h11111111;   // crowd bucket 1: queue-full stalls
      a = $urandom_range(1, 5000);
      t = to_proj(amul(g, u256'(a)), u256'($urandom_range(1, 777)), 1);
      @(negedge clk);
      ld_valid = 1; ld_keep = e < n; ld_last = empty_end ? (e == n) : (e == n - 1);
      ld_scalar = s; ld_point = t[767:0];
      #1;   // let the ready, which depends on the offered pair, settle
      while (!ld_ready) @(negedge clk);
      if (e < n) k = madd(k, mmul(s, u256'(a), P_SCALAR), P_SCALAR);
    end
    @(negedge clk);
    ld_valid = 0;
    while (!res_valid) @(negedge clk);
    v = '0; v[767:0] = res_point;
    checks++;
    if (!proj_eq(v, amul(g, k), 1)) begin failures++; $display("MSM of %0d points wrong", n); end
    @(posedge clk);
  endtask

  initial begin
    ld_valid = 0; ld_keep = 0; ld_last = 0; ld_scalar = '0; ld_point = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    run_msm(23, 0);
    checks++;
    if (batches != 2) begin failures++; $display("expected 2 batches, saw %0d", batches); end
    run_msm(3, 1);
    checks++;
    if (stalls == 0) begin failures++; $display("no queue stall happened"); end
    $display("batches=%0d stalls=%0d issues=%0d", batches, stalls, issues);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

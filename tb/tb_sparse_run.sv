// tb_sparse_run: drives one sparse_msm_core (G1 when EXT = 1, G2 when
// EXT = 2) at reduced size (2 PEs, 4-bit windows, 16-bit scalars, 8 points
// per batch) through three MSMs and checks each result against the affine
// reference. Scalars are drawn as 0 (20 %), 1 (40 %) or random 16-bit values;
// 15 % of the points are the point at infinity. MSM 2 has only scalars 0/1
// (the Pippenger part sees only the closing beat), MSM 3 ends on a scalar-1
// pair. Reports its own checks/failures and event counts; `done` goes high
// at the end.
module tb_sparse_run #(parameter int EXT = 1, parameter int PADD_LAT = 30) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_zero,
  output int   n_one,
  output int   n_dense,
  output int   n_fold
);
  import szkp_pkg::*;
  import tb_ec_ref::*;
  localparam int KM = 2;
  typedef logic [2:0][EXT-1:0][FW-1:0] pt_t;

  logic rst = 1;
  logic ld_valid, ld_ready, ld_last, res_valid, busy, ev_zero, ev_one, ev_dense, ev_fold;
  fe_t  ld_scalar;
  pt_t  ld_point, res_point;
  logic [KM-1:0] ev_stall;

  sparse_msm_core #(.EXT(EXT), .KM(KM), .W(4), .PPW(8), .II(4), .D(4), .PADD_LAT(PADD_LAT),
                    .SBITS(16), .QD(32)) dut (.*);

  always_ff @(posedge clk) begin
    n_zero  <= n_zero  + int'(ev_zero);
    n_one   <= n_one   + int'(ev_one);
    n_dense <= n_dense + int'(ev_dense);
    n_fold  <= n_fold  + int'(ev_fold);
  end

  task automatic run_msm(int n, int mode);
    apt_t g, p;
    u256 k;
    logic [1535:0] t, v;
    int a, cls;
    fe_t s;
    g = EXT == 1 ? g1_gen() : g2_gen();
    k = 0;
    for (int e = 0; e < n; e++) begin
      cls = $urandom_range(0, 99);
      if (mode == 1) s = cls < 40 ? 0 : 1;
      else if (mode == 2 && e == n - 1) s = 1;
      else s = cls < 20 ? 0 : cls < 60 ? 1 : fe_t'($urandom_range(2, 65535));
      a = $urandom_range(1, 300);
      p = $urandom_range(0, 99) < 15 ? ainf() : amul(g, u256'(a));
      if (p.inf) a = 0;
      t = to_proj(p, u256'($urandom_range(1, 777)), EXT);
      @(negedge clk);
      ld_valid = 1; ld_last = e == n - 1;
      ld_scalar = s; ld_point = t[EXT*768-1:0];
      #1;   // let the ready, which depends on the offered pair, settle
      while (!ld_ready) @(negedge clk);
      k = madd(k, mmul(s, u256'(a), P_SCALAR), P_SCALAR);
    end
    @(negedge clk);
    ld_valid = 0; ld_last = 0;
    while (!res_valid) @(negedge clk);
    v = '0; v[EXT*768-1:0] = res_point;
    checks++;
    if (!proj_eq(v, amul(g, k), EXT)) begin
      failures++;
      $display("EXT=%0d: sparse MSM of %0d points (mode %0d) wrong", EXT, n, mode);
    end
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; n_zero = 0; n_one = 0; n_dense = 0; n_fold = 0;
    ld_valid = 0; ld_last = 0; ld_scalar = '0; ld_point = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    run_msm(24, 0);
    run_msm(9, 1);
    run_msm(12, 2);
    done = 1;
  end
endmodule

// tb_szkp_top: end-to-end test of szkp_top at reduced size. All four engines
// run at the same time, as on the chip:
//   * NTT core (2 PEs x 2 butterflies, n = 16): every PE gets its own input
//     vector; forward DIF, then inverse DIT of the result scaled by 1/n and
//     stored as operand, then forward with EW_MUL and with EW_SUB.
//   * dense G1 MSM (4 PEs, 4-bit windows, 16 points per batch): 21 pairs, half
//     of them crowded into one bucket so that queue stalls occur (bucket
//     queues 2 deep).
//   * sparse G1 and sparse G2 MSMs (2 PEs resp. 1 PE, 8 points per batch):
//     a mix of scalars 0, 1 and others and of points at infinity.
// Every result is compared with an independent reference (direct DFT, affine
// curve arithmetic). The test counts each mechanism: NTT stages, DIF and DIT
// passes, each element-wise mode, dense stalls/bubbles/batches, sparse drops,
// scalar-1 pairs, Pippenger pairs and buffer folds (G1 and G2); one that
// never happened is a failure. Scalars are 16 bits (SBITS = 16).
module tb_szkp_top;
  import szkp_pkg::*;
  import tb_ec_ref::*;
  localparam int KN = 2, U = 2, NMAX = 16, SB = 16;
  localparam int DKM = 4, S1KM = 2, S2KM = 1;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- DUT ports ----
  logic ntt_start, ntt_dit, ntt_op_store, ntt_tw_wr_en, ntt_gen_wr_en;
  logic [4:0] ntt_logn;
  ew_op_e ntt_ew_op;
  fe_t ntt_gen_step, ntt_tw_wr_data, ntt_gen_wr_data;
  logic [KN-1:0] ntt_busy, ntt_op_wr_en, ntt_in_valid, ntt_out_valid, ev_ntt_stage;
  logic [2:0] ntt_tw_wr_addr;
  logic [2:0] ntt_gen_wr_idx;
  logic [2:0] ntt_op_wr_row;
  logic [U-1:0][FW-1:0] ntt_op_wr_data;
  logic [KN-1:0][U-1:0][FW-1:0] ntt_in_data, ntt_out_data;

  logic dn_valid, dn_ready, dn_keep, dn_last, dn_res_valid, dn_busy, ev_dn_batch;
  fe_t dn_scalar;
  logic [2:0][0:0][FW-1:0] dn_point, dn_res_point;
  logic [DKM-1:0] ev_dn_stall, ev_dn_bubble, ev_dn_issue;

  logic sg1_valid, sg1_ready, sg1_last, sg1_res_valid, sg1_busy;
  fe_t sg1_scalar;
  logic [2:0][0:0][FW-1:0] sg1_point, sg1_res_point;
  logic [3:0] ev_sg1, ev_sg2;
  logic [S1KM-1:0] ev_sg1_stall;
  logic sg2_valid, sg2_ready, sg2_last, sg2_res_valid, sg2_busy;
  fe_t sg2_scalar;
  logic [2:0][1:0][FW-1:0] sg2_point, sg2_res_point;
  logic [S2KM-1:0] ev_sg2_stall;

  szkp_top #(.NTT_KN(KN), .NTT_U(U), .NTT_NMAX(NMAX),
             .DN_KM(DKM), .DN_W(4), .DN_PPW(16), .DN_II(1),
             .SG1_KM(S1KM), .SG1_W(4), .SG1_PPW(8), .SG1_II(4),
             .SG2_KM(S2KM), .SG2_W(4), .SG2_PPW(8), .SG2_II(4), .MSM_D(2), .SBITS(SB)) dut (.*);

  // ---- mechanism counters ----
  int n_stage = 0, n_dif = 0, n_dit = 0, n_pass = 0, n_mul = 0, n_sub = 0;
  int n_stall = 0, n_bubble = 0, n_batch = 0;
  int n_sg [2][4];   // [G1/G2][zero, one, dense, fold]
  initial for (int c = 0; c < 2; c++) for (int e = 0; e < 4; e++) n_sg[c][e] = 0;
  always_ff @(posedge clk) begin
    n_stage  <= n_stage + $countones(ev_ntt_stage);
    n_stall  <= n_stall + $countones(ev_dn_stall);
    n_bubble <= n_bubble + $countones(ev_dn_bubble);
    n_batch  <= n_batch + int'(ev_dn_batch);
    for (int e = 0; e < 4; e++) begin
      n_sg[0][e] <= n_sg[0][e] + int'(ev_sg1[e]);
      n_sg[1][e] <= n_sg[1][e] + int'(ev_sg2[e]);
    end
  end

  // ---- NTT ----
  u256 xin [KN][NMAX], got [KN][NMAX];

  function automatic int bitrev(int v, int L);
    int r = 0;
    for (int i = 0; i < L; i++) r |= ((v >> i) & 1) << (L - 1 - i);
    return r;
  endfunction

  task automatic ntt_tables(int L, bit inv, u256 g0, u256 q);
    u256 w = mpow(5, (P_SCALAR - 1) >> L, P_SCALAR);
    if (inv) w = minv(w, P_SCALAR);
    for (int e = 0; e < (1 << L) / 2; e++) begin
      @(negedge clk);
      ntt_tw_wr_en = 1; ntt_tw_wr_addr = 3'(e);
      ntt_tw_wr_data = to_mont(mpow(w, u256'(e), P_SCALAR), P_SCALAR);
    end
    for (int k = 0; k < 4; k++)
      for (int l = 0; l < U; l++) begin
        @(negedge clk);
        ntt_tw_wr_en = 0; ntt_gen_wr_en = 1; ntt_gen_wr_idx = 3'(k * 2 + l);
        ntt_gen_wr_data = to_mont(mmul(g0, mpow(q, u256'(k * U + l), P_SCALAR), P_SCALAR), P_SCALAR);
      end
    @(negedge clk);
    ntt_tw_wr_en = 0; ntt_gen_wr_en = 0;
    ntt_gen_step = to_mont(mpow(q, u256'(4 * U), P_SCALAR), P_SCALAR);
  endtask

  task automatic ntt_run(int L, bit dit, ew_op_e op, bit store, bit from_got);
    int n = 1 << L, r = 0;
    u256 src [KN][NMAX];
    for (int p = 0; p < KN; p++) for (int i = 0; i < n; i++) src[p][i] = from_got ? got[p][i] : xin[p][i];
    @(negedge clk);
    ntt_start = 1; ntt_logn = 5'(L); ntt_dit = dit; ntt_ew_op = op; ntt_op_store = store;
    if (dit) n_dit++; else n_dif++;
    case (op) EW_PASS: n_pass++; EW_MUL: n_mul++; default: n_sub++; endcase
    @(negedge clk);
    ntt_start = 0;
    for (int row = 0; row < n / U; row++) begin
      ntt_in_valid = '1;
      for (int p = 0; p < KN; p++)
        for (int l = 0; l < U; l++) ntt_in_data[p][l] = to_mont(src[p][row * U + l], P_SCALAR);
      @(negedge clk);
    end
    ntt_in_valid = '0;
    while (r < n / U) begin
      @(negedge clk);
      if (ntt_out_valid[0]) begin
        for (int p = 0; p < KN; p++) begin
          if (!ntt_out_valid[p]) begin failures++; $display("NTT PEs out of step"); end
          for (int l = 0; l < U; l++)
            got[p][r * U + l] = mmul(ntt_out_data[p][l], minv(to_mont(1, P_SCALAR), P_SCALAR), P_SCALAR);
        end
        r++;
      end
    end
    while (|ntt_busy) @(negedge clk);
  endtask

  task automatic ntt_test();
    int L = 4, n = 16;
    u256 X [KN][NMAX];
    u256 w, e;
    u256 q;
    for (int p = 0; p < KN; p++)
      for (int i = 0; i < n; i++) xin[p][i] = mmul({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}, 1, P_SCALAR);
    w = mpow(5, (P_SCALAR - 1) >> L, P_SCALAR);
    for (int p = 0; p < KN; p++)
      for (int k = 0; k < n; k++) begin
        X[p][k] = 0;
        for (int i = 0; i < n; i++) X[p][k] = madd(X[p][k], mmul(xin[p][i], mpow(w, u256'(i * k), P_SCALAR), P_SCALAR), P_SCALAR);
      end
    ntt_tables(L, 0, 1, 1);
    ntt_run(L, 0, EW_PASS, 0, 0);
    for (int p = 0; p < KN; p++) for (int i = 0; i < n; i++) begin
      checks++; if (got[p][i] != X[p][bitrev(i, L)]) begin failures++; $display("NTT fwd PE%0d [%0d] wrong", p, i); end
    end
    ntt_tables(L, 1, minv(u256'(n), P_SCALAR), 1);
    ntt_run(L, 1, EW_PASS, 1, 1);
    for (int p = 0; p < KN; p++) for (int i = 0; i < n; i++) begin
      checks++; if (got[p][i] != xin[p][i]) begin failures++; $display("NTT inv PE%0d [%0d] wrong", p, i); end
    end
    q = u256'($urandom_range(2, 1000));
    ntt_tables(L, 0, 1, q);
    ntt_run(L, 0, EW_MUL, 0, 0);
    for (int p = 0; p < KN; p++) for (int i = 0; i < n; i++) begin
      e = mmul(mmul(X[p][bitrev(i, L)], xin[p][i], P_SCALAR), mpow(q, u256'(i), P_SCALAR), P_SCALAR);
      checks++; if (got[p][i] != e) begin failures++; $display("NTT ewmul PE%0d [%0d] wrong", p, i); end
    end
    ntt_tables(L, 0, 1, 1);
    ntt_run(L, 0, EW_SUB, 0, 0);
    for (int p = 0; p < KN; p++) for (int i = 0; i < n; i++) begin
      checks++; if (got[p][i] != msub(xin[p][i], X[p][bitrev(i, L)], P_SCALAR)) begin failures++; $display("NTT ewsub PE%0d [%0d] wrong", p, i); end
    end
  endtask

  // ---- dense MSM ----
  task automatic dense_test(int n);
    apt_t g = g1_gen();
    u256 k = 0;
    logic [1535:0] t, v;
    int a;
    fe_t s;
    for (int e = 0; e < n; e++) begin
      s = fe_t'($urandom_range(0, 65535));
      if (e % 2 == 0) s = s & 256'h1111;
      a = $urandom_range(1, 3000);
      t = to_proj(amul(g, u256'(a)), u256'($urandom_range(1, 777)), 1);
      @(negedge clk);
      dn_valid = 1; dn_keep = 1; dn_last = e == n - 1; dn_scalar = s; dn_point = t[767:0];
      #1;   // let the ready, which depends on the offered pair, settle
      while (!dn_ready) @(negedge clk);
      k = madd(k, mmul(s, u256'(a), P_SCALAR), P_SCALAR);
    end
    @(negedge clk);
    dn_valid = 0; dn_last = 0;
    while (!dn_res_valid) @(negedge clk);
    v = '0; v[767:0] = dn_res_point;
    checks++;
    if (!proj_eq(v, amul(g, k), 1)) begin failures++; $display("dense MSM wrong"); end
  endtask

  // ---- sparse MSMs ----
  task automatic sparse_test(int ext, int n);
    apt_t g, p;
    u256 k = 0;
    logic [1535:0] t, v;
    int a, cls;
    fe_t s;
    g = ext == 1 ? g1_gen() : g2_gen();
    for (int e = 0; e < n; e++) begin
      cls = $urandom_range(0, 99);
      s = cls < 20 ? 0 : cls < 60 ? 1 : fe_t'($urandom_range(2, 65535));
      a = $urandom_range(1, 300);
      p = $urandom_range(0, 99) < 15 ? ainf() : amul(g, u256'(a));
      if (p.inf) a = 0;
      t = to_proj(p, u256'($urandom_range(1, 777)), ext);
      @(negedge clk);
      if (ext == 1) begin
        sg1_valid = 1; sg1_last = e == n - 1; sg1_scalar = s; sg1_point = t[767:0];
        #1;   // let the ready, which depends on the offered pair, settle
        while (!sg1_ready) @(negedge clk);
      end else begin
        sg2_valid = 1; sg2_last = e == n - 1; sg2_scalar = s; sg2_point = t[1535:0];
        #1;   // let the ready, which depends on the offered pair, settle
        while (!sg2_ready) @(negedge clk);
      end
      k = madd(k, mmul(s, u256'(a), P_SCALAR), P_SCALAR);
    end
    @(negedge clk);
    if (ext == 1) begin
      sg1_valid = 0; sg1_last = 0;
      while (!sg1_res_valid) @(negedge clk);
      v = '0; v[767:0] = sg1_res_point;
    end else begin
      sg2_valid = 0; sg2_last = 0;
      while (!sg2_res_valid) @(negedge clk);
      v = sg2_res_point;
    end
    checks++;
    if (!proj_eq(v, amul(g, k), ext)) begin failures++; $display("sparse G%0d MSM wrong", ext); end
  endtask

  task automatic need(string what, int cnt);
    checks++;
    $display("  %-22s %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("mechanism never happened: %s", what); end
  endtask

  initial begin
    ntt_start = 0; ntt_logn = 0; ntt_dit = 0; ntt_ew_op = EW_PASS; ntt_op_store = 0; ntt_gen_step = '0;
    ntt_tw_wr_en = 0; ntt_tw_wr_addr = 0; ntt_tw_wr_data = 0; ntt_gen_wr_en = 0; ntt_gen_wr_idx = 0;
    ntt_gen_wr_data = 0; ntt_op_wr_en = 0; ntt_op_wr_row = 0; ntt_op_wr_data = '0;
    ntt_in_valid = 0; ntt_in_data = '0;
    dn_valid = 0; dn_keep = 0; dn_last = 0; dn_scalar = 0; dn_point = '0;
    sg1_valid = 0; sg1_last = 0; sg1_scalar = 0; sg1_point = '0;
    sg2_valid = 0; sg2_last = 0; sg2_scalar = 0; sg2_point = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    fork
      ntt_test();
      dense_test(21);
      sparse_test(1, 20);
      sparse_test(2, 14);
    join
    $display("mechanisms:");
    need("NTT stages", n_stage);
    need("NTT DIF passes", n_dif);
    need("NTT DIT passes", n_dit);
    need("EW pass", n_pass);
    need("EW multiply", n_mul);
    need("EW subtract", n_sub);
    need("dense queue stalls", n_stall);
    need("dense PADD bubbles", n_bubble);
    need("dense batches > 1", n_batch > 1 ? n_batch : 0);
    need("G1 dropped pairs", n_sg[0][0]);
    need("G1 scalar-1 pairs", n_sg[0][1]);
    need("G1 Pippenger pairs", n_sg[0][2]);
    need("G1 buffer folds", n_sg[0][3]);
    need("G2 dropped pairs", n_sg[1][0]);
    need("G2 scalar-1 pairs", n_sg[1][1]);
    need("G2 Pippenger pairs", n_sg[1][2]);
    need("G2 buffer folds", n_sg[1][3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

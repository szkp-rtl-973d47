// tb_ntt_pe: NTT PE at reduced size (U = 2 butterflies, NMAX = 32), n = 16
// and n = 32. Reference: direct O(n^2) DFT over Fr with w = 5^((r-1)/n)
// (5 generates the multiplicative group of Fr). Sequence per size:
//   1. forward (DIF), pass-through      -> X in bit-reversed order
//   2. inverse (DIT) of that output, g = 1/n, stored to the operand memory
//                                       -> x in natural order
//   3. forward, EW_MUL by the stored x and geometric g_e = q^e
//   4. forward, EW_SUB from the stored x
module tb_ntt_pe;
  import szkp_pkg::*;
  import tb_ec_ref::*;
  localparam int U = 2, NMAX = 32;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stages = 0;

  logic start, cfg_dit, cfg_op_store, busy, tw_wr_en, op_wr_en, gen_wr_en, in_valid, out_valid, ev_stage;
  logic [4:0] cfg_logn;
  ew_op_e cfg_ew_op;
  fe_t cfg_gen_step, tw_wr_data, gen_wr_data;
  logic [3:0] tw_wr_addr;
  logic [3:0] op_wr_row;
  logic [U-1:0][FW-1:0] op_wr_data, in_data, out_data;
  logic [2:0] gen_wr_idx;

  ntt_pe #(.U(U), .NMAX(NMAX)) dut (.*);

  always_ff @(posedge clk) if (ev_stage) stages <= stages + 1;

  u256 xin [NMAX], got [NMAX];

  function automatic int bitrev(int v, int L);
    int r = 0;
    for (int i = 0; i < L; i++) r |= ((v >> i) & 1) << (L - 1 - i);
    return r;
  endfunction

  task automatic load_tables(int L, bit inv, u256 g0, u256 q);
    u256 w, wi;
    int n = 1 << L;
    w = mpow(5, (P_SCALAR - 1) >> L, P_SCALAR);
    if (inv) w = minv(w, P_SCALAR);
    for (int e = 0; e < n / 2; e++) begin
      @(negedge clk);
      tw_wr_en = 1; tw_wr_addr = 4'(e); tw_wr_data = to_mont(mpow(w, u256'(e), P_SCALAR), P_SCALAR);
    end
    for (int k = 0; k < 4; k++)
      for (int l = 0; l < U; l++) begin
        @(negedge clk);
        tw_wr_en = 0;
        gen_wr_en = 1; gen_wr_idx = 3'(k * 2 + l);   // {k, lane}, lane width 1
        gen_wr_data = to_mont(mmul(g0, mpow(q, u256'(k * U + l), P_SCALAR), P_SCALAR), P_SCALAR);
      end
    @(negedge clk);
    tw_wr_en = 0; gen_wr_en = 0;
    cfg_gen_step = to_mont(mpow(q, u256'(4 * U), P_SCALAR), P_SCALAR);
  endtask

  // run one transform on v[] (normal form), results (normal form) in got[]
  task automatic run(int L, bit dit, ew_op_e op, bit store, u256 v []);
    int n = 1 << L, r = 0;
    @(negedge clk);
    start = 1; cfg_logn = 5'(L); cfg_dit = dit; cfg_ew_op = op; cfg_op_store = store;
    @(negedge clk);
    start = 0;
    for (int row = 0; row < n / U; row++) begin
      in_valid = 1;
      for (int l = 0; l < U; l++) in_data[l] = to_mont(v[row * U + l], P_SCALAR);
      @(negedge clk);
    end
    in_valid = 0;
    while (r < n / U) begin
      @(negedge clk);
      if (out_valid) begin
        for (int l = 0; l < U; l++) got[r * U + l] = mmul(out_data[l], minv(to_mont(1, P_SCALAR), P_SCALAR), P_SCALAR);
        r++;
      end
    end
    while (busy) @(negedge clk);
  endtask

  task automatic check(string what, int n, u256 e []);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (got[i] != e[i]) begin
        failures++;
        if (failures < 10) $display("%s: element %0d is %h, expected %h", what, i, got[i], e[i]);
      end
    end
  endtask

  initial begin
    u256 v [], X [], ex [], x2 [];
    u256 w, q, ninv;
    start = 0; cfg_logn = 0; cfg_dit = 0; cfg_ew_op = EW_PASS; cfg_op_store = 0; cfg_gen_step = '0;
    tw_wr_en = 0; tw_wr_addr = 0; tw_wr_data = 0; op_wr_en = 0; op_wr_row = 0; op_wr_data = '0;
    gen_wr_en = 0; gen_wr_idx = 0; gen_wr_data = 0; in_valid = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int L = 4; L <= 5; L++) begin
      int n, s0;
      n = 1 << L;
      v = new[n]; X = new[n]; ex = new[n]; x2 = new[n];
      for (int i = 0; i < n; i++) v[i] = mmul({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom}, 1, P_SCALAR);
      w = mpow(5, (P_SCALAR - 1) >> L, P_SCALAR);
      for (int k = 0; k < n; k++) begin
        X[k] = 0;
        for (int i = 0; i < n; i++) X[k] = madd(X[k], mmul(v[i], mpow(w, u256'(i * k), P_SCALAR), P_SCALAR), P_SCALAR);
      end
      // 1. forward
      s0 = stages;
      load_tables(L, 0, 1, 1);
      run(L, 0, EW_PASS, 0, v);
      for (int i = 0; i < n; i++) ex[i] = X[bitrev(i, L)];
      check("forward", n, ex);
      checks++;
      if (stages - s0 != L) begin failures++; $display("saw %0d stages, expected %0d", stages - s0, L); end
      // 2. inverse of the bit-reversed output, scaled by 1/n, stored as operand
      ninv = minv(u256'(n), P_SCALAR);
      load_tables(L, 1, ninv, 1);
      for (int i = 0; i < n; i++) x2[i] = got[i];
      run(L, 1, EW_PASS, 1, x2);
      check("inverse", n, v);
      // 3. forward with EW_MUL by the stored operand and a geometric sequence
      q = u256'($urandom_range(2, 1 << 20));
      load_tables(L, 0, 3, q);
      run(L, 0, EW_MUL, 0, v);
      for (int i = 0; i < n; i++)
        ex[i] = mmul(mmul(X[bitrev(i, L)], v[i], P_SCALAR), mmul(3, mpow(q, u256'(i), P_SCALAR), P_SCALAR), P_SCALAR);
      check("ewm", n, ex);
      // 4. forward with EW_SUB from the operand
      load_tables(L, 0, 1, 1);
      run(L, 0, EW_SUB, 0, v);
      for (int i = 0; i < n; i++) ex[i] = msub(v[i], X[bitrev(i, L)], P_SCALAR);
      check("ews", n, ex);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

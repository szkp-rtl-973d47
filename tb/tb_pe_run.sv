// tb_pe_run: runs one msm_pe (G1, 4-bit windows, shallow queues so that
// stalls happen) against behavioural scalar and point banks, for one
// dispatch policy:
//   CLEAR, ACCUM (n1 scalars), ACCUM (again, same slot: accumulates),
//   REDUCE  -> sum over j of digit_j * P_j  (both passes)
//   WINRED  -> 2^k * A + B
// Points are P_j = a_j G with small a_j, so the expected results are
// (integer) multiples of G computed by the affine reference. Reports the
// number of stalls and bubbles seen and checks the reduction latency
// against the paper's 2 * t_add * (2^W - 1).
module tb_pe_run
  import szkp_pkg::*;
  import tb_ec_ref::*;
#(
  parameter policy_e POLICY = POL_LQ
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output int   stalls,
  output int   bubbles,
  output logic done
);
  localparam int W = 4, NB = 15, D = 4, BD = 16, LAT = 30;
  typedef logic [2:0][0:0][FW-1:0] pt_t;

  fe_t  scal [BD];
  pt_t  pts  [BD];
  int   amul_k [BD];

  logic          cmd_valid, cmd_ready, sc_rd_en, pt_rd_en, res_valid, ev_stall, ev_bubble, ev_issue;
  pe_op_e        cmd_op;
  logic [1:0]    cmd_slot;
  logic [7:0]    cmd_off;
  logic [4:0]    cmd_n;
  logic [8:0]    cmd_k;
  pt_t           cmd_pa, cmd_pb, pt_rd_data, res_point;
  logic [1:0][3:0] sc_rd_addr;
  logic [3:0]    pt_rd_addr;
  logic [1:0][FW-1:0] sc_rd_data;

  msm_pe #(.EXT(1), .W(W), .D(D), .NSLOT(2), .BANK_DEPTH(BD), .POLICY(POLICY), .MAXR(4),
           .II(1), .PADD_LAT(LAT)) dut (.*);

  always_ff @(posedge clk) begin
    if (sc_rd_en) begin
      sc_rd_data[0] <= scal[sc_rd_addr[0]];
      sc_rd_data[1] <= scal[sc_rd_addr[1]];
    end
    if (pt_rd_en) pt_rd_data <= pts[pt_rd_addr];
    if (rst) begin stalls <= 0; bubbles <= 0; end
    else begin
      stalls  <= stalls + (ev_stall ? 1 : 0);
      bubbles <= bubbles + (ev_bubble ? 1 : 0);
    end
  end

  task automatic command(pe_op_e op, int slot, int off, int nn, int k, pt_t a, pt_t b);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_op = op; cmd_slot = 2'(slot); cmd_off = 8'(off); cmd_n = 5'(nn); cmd_k = 9'(k);
    cmd_pa = a; cmd_pb = b; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
  endtask

  task automatic expect_res(apt_t r, string what, int max_cycles, output int cyc);
    logic [1535:0] v;
    cyc = 0;
    while (!res_valid) begin @(negedge clk); cyc++; end
    v = '0; v[767:0] = res_point;
    checks++;
    if (!proj_eq(v, r, 1)) begin failures++; $display("policy %0d: %s wrong", POLICY, what); end
    if (cyc > max_cycles) begin failures++; $display("policy %0d: %s took %0d cycles", POLICY, what, cyc); end
  endtask

  initial begin
    apt_t g, a, b;
    longint kexp;
    int off, cyc, n1;
    logic [1535:0] t;
    checks = 0; failures = 0; done = 0; cmd_valid = 0;
    cmd_op = PE_CLEAR; cmd_slot = 0; cmd_off = 0; cmd_n = 0; cmd_k = 0; cmd_pa = '0; cmd_pb = '0;
    g = g1_gen();
    off = 8;
    n1 = 13;
    for (int j = 0; j < BD; j++) begin
      scal[j] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (j < 6) scal[j][off +: W] = 4'd9;          // many scalars on one bucket: queue full
      amul_k[j] = $urandom_range(1, 1000);
      t = to_proj(amul(g, u256'(amul_k[j])), u256'($urandom_range(1, 99999)), 1);
      pts[j] = t[767:0];
    end
    kexp = 0;
    for (int j = 0; j < n1; j++) kexp += longint'(scal[j][off +: W]) * amul_k[j];
    wait (!rst);
    command(PE_CLEAR, 1, 0, 0, 0, '0, '0);
    command(PE_ACCUM, 1, off, n1, 0, '0, '0);
    command(PE_REDUCE, 1, 0, 0, 0, '0, '0);
    expect_res(amul(g, u256'(kexp)), "bucket reduction", 2 * (LAT + 2) * NB + 10, cyc);
    checks++;
    if (cyc < 2 * LAT * NB) begin failures++; $display("reduction faster than 2*t_add*B: %0d", cyc); end
    // second pass on the same slot adds onto the kept bucket sums
    command(PE_ACCUM, 1, off, BD, 0, '0, '0);
    for (int j = 0; j < BD; j++) kexp += longint'(scal[j][off +: W]) * amul_k[j];
    command(PE_REDUCE, 1, 0, 0, 0, '0, '0);
    expect_res(amul(g, u256'(kexp)), "accumulated reduction", 2 * (LAT + 2) * NB + 10, cyc);
    // window-reduction step
    a = amul(g, 77); b = amul(g, 5);
    t = to_proj(a, 3, 1); cmd_pa = t[767:0];
    command(PE_WINRED, 0, 0, 0, 5, t[767:0], pts[0]);
    expect_res(amul(g, u256'(77 * 32 + amul_k[0])), "window step", 7 * (LAT + 2), cyc);
    // clearing empties the slot
    command(PE_CLEAR, 1, 0, 0, 0, '0, '0);
    command(PE_REDUCE, 1, 0, 0, 0, '0, '0);
    expect_res(ainf(), "cleared slot", 2 * (LAT + 2) * NB + 10, cyc);
    done = 1;
  end
endmodule

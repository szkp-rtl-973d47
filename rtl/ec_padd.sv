// ec_padd: pipelined elliptic-curve point adder (the "PADD" of every MSM PE).
//
// Adds two points of BN128 G1 (EXT=1, coordinates in Fq) or G2 (EXT=2,
// coordinates in Fq2) given in projective coordinates (X:Y:Z), all values
// in Montgomery form. The formula is the complete addition law for short
// Weierstrass curves with a = 0 (Renes, Costello, Batina 2016, Alg. 7), so
// the same unit also doubles a point (P + P) and handles the point at
// infinity (0:1:0) without any special case; the paper notes that its
// PADDs also perform the doublings of the window reduction.
//
// The 14 multiplications (12 general, 2 by b3) sit in three banks
// (6, 2 and 6 products) separated by modular add/sub stages. With II > 1
// each bank is folded onto ceil(n/II) multipliers and the adder accepts one
// pair every II cycles (in_ready). The result appears LATENCY cycles after
// the inputs were accepted; the default is the paper's 30-cycle G1 PADD
// (Table 1), 55 cycles is the G2 figure. The internal pipeline is shorter
// (padd_core_lat) and is padded to LATENCY with registers. A TAGW-bit tag
// travels with each operation. There is no output stall: results must be
// taken when out_valid is high.
module ec_padd
  import szkp_pkg::*;
#(
  parameter int EXT     = 1,
  parameter int II      = 1,
  parameter int LATENCY = G1_PADD_LAT,
  parameter int TAGW    = 8
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [2:0][EXT-1:0][FW-1:0]  p1,
  input  logic [2:0][EXT-1:0][FW-1:0]  p2,
  input  logic [TAGW-1:0]              in_tag,
  output logic                         out_valid,
  output logic [2:0][EXT-1:0][FW-1:0]  sum,
  output logic [TAGW-1:0]              out_tag
);
  typedef logic [EXT-1:0][FW-1:0] el_t;
  localparam int CORE = padd_core_lat(EXT, II);
  localparam int PAD  = (LATENCY > CORE) ? LATENCY - CORE : 0;
  localparam int BLAT = 1 + II + fe_mul_lat(EXT);

  function automatic el_t fadd(el_t a, el_t b);
    el_t r;
    for (int i = 0; i < EXT; i++) r[i] = mod_add(a[i], b[i], P_BASE);
    return r;
  endfunction
  function automatic el_t fsub(el_t a, el_t b);
    el_t r;
    for (int i = 0; i < EXT; i++) r[i] = mod_sub(a[i], b[i], P_BASE);
    return r;
  endfunction

  el_t b3;
  if (EXT == 1) begin : g_b3_g1
    assign b3 = B3_G1;
  end else begin : g_b3_g2
    assign b3 = {B3_G2_C1, B3_G2_C0};
  end

  // ---- issue control ------------------------------------------------------
  logic [7:0] cool;
  assign in_ready = (cool == 0);
  always_ff @(posedge clk) begin
    if (rst)                        cool <= '0;
    else if (in_valid && in_ready)  cool <= 8'(II - 1);
    else if (cool != 0)             cool <= cool - 1'b1;
  end

  // ---- stage L0: operand sums ---------------------------------------------
  logic                       l0_v;
  logic [5:0][EXT-1:0][FW-1:0] m1a, m1b;
  always_ff @(posedge clk) begin
    l0_v   <= !rst && in_valid && in_ready;
    m1a[0] <= p1[0];             m1b[0] <= p2[0];               // t0 = X1 X2
    m1a[1] <= p1[1];             m1b[1] <= p2[1];               // t1 = Y1 Y2
    m1a[2] <= p1[2];             m1b[2] <= p2[2];               // t2 = Z1 Z2
    m1a[3] <= fadd(p1[0], p1[1]); m1b[3] <= fadd(p2[0], p2[1]); // (X1+Y1)(X2+Y2)
    m1a[4] <= fadd(p1[1], p1[2]); m1b[4] <= fadd(p2[1], p2[2]); // (Y1+Z1)(Y2+Z2)
    m1a[5] <= fadd(p1[0], p1[2]); m1b[5] <= fadd(p2[0], p2[2]); // (X1+Z1)(X2+Z2)
  end

  logic                        b1_v;
  logic [5:0][EXT-1:0][FW-1:0] b1_y;
  fe_mul_bank #(.EXT(EXT), .NOPS(6), .II(II)) u_bank1 (
    .clk, .rst, .in_valid(l0_v), .a(m1a), .b(m1b), .out_valid(b1_v), .y(b1_y));

  // ---- stage L1 -----------------------------------------------------------
  logic                        l1_v;
  logic [1:0][EXT-1:0][FW-1:0] m2a, m2b;
  el_t                         l1_t1, l1_t3, l1_t4, l1_x3;   // carried past bank 2
  always_ff @(posedge clk) begin
    l1_v   <= !rst && b1_v;
    l1_t1  <= b1_y[1];
    l1_t3  <= fsub(b1_y[3], fadd(b1_y[0], b1_y[1]));           // X1Y2 + X2Y1
    l1_t4  <= fsub(b1_y[4], fadd(b1_y[1], b1_y[2]));           // Y1Z2 + Y2Z1
    l1_x3  <= fadd(fadd(b1_y[0], b1_y[0]), b1_y[0]);           // 3 X1X2
    m2a[0] <= b3; m2b[0] <= b1_y[2];                             // b3 Z1Z2
    m2a[1] <= b3; m2b[1] <= fsub(b1_y[5], fadd(b1_y[0], b1_y[2])); // b3 (X1Z2 + X2Z1)
  end

  logic                        b2_v;
  logic [1:0][EXT-1:0][FW-1:0] b2_y;
  fe_mul_bank #(.EXT(EXT), .NOPS(2), .II(II)) u_bank2 (
    .clk, .rst, .in_valid(l1_v), .a(m2a), .b(m2b), .out_valid(b2_v), .y(b2_y));

  logic [3:0][EXT-1:0][FW-1:0] c2;
  pipe_delay #(.W(4*EXT*FW), .N(BLAT)) u_carry2 (
    .clk, .d({l1_x3, l1_t4, l1_t3, l1_t1}), .q(c2));

  // ---- stage L2 -----------------------------------------------------------
  logic                        l2_v;
  logic [5:0][EXT-1:0][FW-1:0] m3a, m3b;
  el_t                         z3a, t1a;
  always_comb begin
    z3a = fadd(c2[0], b2_y[0]);   // t1 + b3 t2
    t1a = fsub(c2[0], b2_y[0]);   // t1 - b3 t2
  end
  always_ff @(posedge clk) begin
    l2_v   <= !rst && b2_v;
    m3a[0] <= c2[2]; m3b[0] <= b2_y[1];   // t4 * Y3
    m3a[1] <= c2[1]; m3b[1] <= t1a;       // t3 * t1
    m3a[2] <= b2_y[1]; m3b[2] <= c2[3];   // Y3 * 3t0
    m3a[3] <= t1a;   m3b[3] <= z3a;       // t1 * Z3
    m3a[4] <= c2[3]; m3b[4] <= c2[1];     // 3t0 * t3
    m3a[5] <= z3a;   m3b[5] <= c2[2];     // Z3 * t4
  end

  logic                        b3_v;
  logic [5:0][EXT-1:0][FW-1:0] b3_y;
  fe_mul_bank #(.EXT(EXT), .NOPS(6), .II(II)) u_bank3 (
    .clk, .rst, .in_valid(l2_v), .a(m3a), .b(m3b), .out_valid(b3_v), .y(b3_y));

  // ---- stage L3: result -----------------------------------------------------
  logic                        l3_v;
  logic [2:0][EXT-1:0][FW-1:0] l3_p;
  always_ff @(posedge clk) begin
    l3_v    <= !rst && b3_v;
    l3_p[0] <= fsub(b3_y[1], b3_y[0]);
    l3_p[1] <= fadd(b3_y[3], b3_y[2]);
    l3_p[2] <= fadd(b3_y[5], b3_y[4]);
  end

  // ---- tag and padding to LATENCY -------------------------------------------
  logic [TAGW-1:0] core_tag;
  pipe_delay #(.W(TAGW), .N(CORE)) u_tag (.clk, .d(in_tag), .q(core_tag));

  logic v_pad [PAD+1];
  assign v_pad[0] = l3_v;
  for (genvar i = 1; i <= PAD; i++) begin : g_vpad
    always_ff @(posedge clk) v_pad[i] <= !rst && v_pad[i-1];
  end
  assign out_valid = v_pad[PAD];
  pipe_delay #(.W(3*EXT*FW + TAGW), .N(PAD)) u_pad (
    .clk, .d({l3_p, core_tag}), .q({sum, out_tag}));

  if (LATENCY < CORE) begin : g_bad_latency
    $error("ec_padd: LATENCY below the internal pipeline depth");
  end
endmodule

// ntt_ew: element-wise arithmetic unit at the output of an NTT PE.
//
// For each of the U lanes (one transform element per lane and cycle):
//   EW_PASS : y = x * g
//   EW_MUL  : y = x * op * g
//   EW_SUB  : y = (op - x) * g
// where op is the lane's word from the operand memory (a prefetched
// operand such as A(x) or A(x)B(x)) and g is an element of a geometric
// sequence (four-step twiddles, the coset generators X or X^-1, the
// 1/(x^N - 1) constant or the 1/n of an inverse transform). The sequences
// are generated on the fly from their first values, as the paper proposes:
// element e = r*U + l (row r, lane l) uses g_e = g0 * q^e. Lane l keeps
// GCH = MONT_LAT+1 running values, loaded with g0*q^(kU+l), k < GCH, and
// each use multiplies the value by gen_step = q^(GCH*U); GCH chains hide the
// multiplier latency so that one row per cycle can be produced.
// Rows must be presented every cycle from row 0 on (in_valid high without
// gaps) for the sequence to stay aligned; gen_wr_* reload it. Latency from
// in_valid to out_valid: 2*MONT_LAT cycles. All values in Montgomery form.
module ntt_ew
  import szkp_pkg::*;
#(
  parameter int U = 32
) (
  input  logic                   clk,
  input  logic                   rst,
  input  ew_op_e                 op_mode,
  input  fe_t                    gen_step,
  input  logic                   gen_wr_en,
  input  logic [$clog2(U)+1:0]   gen_wr_idx,   // {k, lane}: k-th running value of a lane
  input  fe_t                    gen_wr_data,
  input  logic                   in_valid,
  input  logic [U-1:0][FW-1:0]   x,
  input  logic [U-1:0][FW-1:0]   opnd,
  output logic                   out_valid,
  output logic [U-1:0][FW-1:0]   y
);
  localparam int GCH = MONT_LAT + 1;
  localparam int LW  = (U > 1) ? $clog2(U) : 1;

  fe_t            g [U][GCH];
  logic [1:0]     ch;                       // chain used by the current row
  logic [U-1:0][FW-1:0] a, b, t, gsel, gd, gnext;
  logic [1:0]     ch_d;
  logic           v_d [2*MONT_LAT];

  always_comb begin
    for (int l = 0; l < U; l++) begin
      case (op_mode)
        EW_SUB:  begin a[l] = mod_sub(opnd[l], x[l], P_SCALAR); b[l] = ONE_SCALAR; end
        EW_MUL:  begin a[l] = x[l];                             b[l] = opnd[l];    end
        default: begin a[l] = x[l];                             b[l] = ONE_SCALAR; end
      endcase
      gsel[l] = g[l][ch];
    end
  end

  for (genvar l = 0; l < U; l++) begin : g_lane
    mont_mul #(.MOD(P_SCALAR), .NPRIME(NP_SCALAR)) u_m1 (.clk, .a(a[l]), .b(b[l]), .y(t[l]));
    mont_mul #(.MOD(P_SCALAR), .NPRIME(NP_SCALAR)) u_m2 (.clk, .a(t[l]), .b(gd[l]), .y(y[l]));
    mont_mul #(.MOD(P_SCALAR), .NPRIME(NP_SCALAR)) u_mg (.clk, .a(gsel[l]), .b(gen_step), .y(gnext[l]));
  end
  pipe_delay #(.W(U*FW), .N(MONT_LAT)) u_gd (.clk, .d(gsel), .q(gd));
  pipe_delay #(.W(2), .N(MONT_LAT)) u_chd (.clk, .d(ch), .q(ch_d));

  // the GCH-cycle-old product replaces the value of its chain
  logic v_g;
  assign v_g = v_d[MONT_LAT-1];
  always_ff @(posedge clk) begin
    if (gen_wr_en) begin
      g[int'(gen_wr_idx[LW-1:0]) % U][gen_wr_idx[LW+1:LW]] <= gen_wr_data;
    end else if (v_g) begin
      for (int l = 0; l < U; l++) g[l][ch_d] <= gnext[l];
    end
  end

  always_ff @(posedge clk) begin
    if (rst || gen_wr_en) ch <= '0;
    else if (in_valid)    ch <= 2'((int'(ch) + 1) % GCH);
  end

  always_ff @(posedge clk) begin
    v_d[0] <= !rst && in_valid;
    for (int i = 1; i < 2*MONT_LAT; i++) v_d[i] <= !rst && v_d[i-1];
  end
  assign out_valid = v_d[2*MONT_LAT-1];
endmodule

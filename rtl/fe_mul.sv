// fe_mul: pipelined multiplier in Fq (EXT=1) or Fq2 = Fq[u]/(u^2+1) (EXT=2).
//
// EXT=1 is one Montgomery multiplier (latency MONT_LAT). EXT=2 multiplies
// (a0 + a1 u)(b0 + b1 u) with Karatsuba's three products:
//   v0 = a0 b0, v1 = a1 b1, v2 = (a0+a1)(b0+b1)
//   c0 = v0 - v1,  c1 = v2 - v0 - v1
// with one register stage before and one after the multipliers, so the
// latency is fe_mul_lat(EXT). Fully pipelined, no valid or stall. The Fq2
// representation and the Karatsuba split are this design's choice; the
// paper only says that G2 arithmetic works on pairs of values.
module fe_mul
  import szkp_pkg::*;
#(
  parameter int EXT = 1
) (
  input  logic                    clk,
  input  logic [EXT-1:0][FW-1:0]  a,
  input  logic [EXT-1:0][FW-1:0]  b,
  output logic [EXT-1:0][FW-1:0]  y
);
  if (EXT == 1) begin : g_fq
    mont_mul #(.MOD(P_BASE), .NPRIME(NP_BASE)) u_mul (.clk, .a(a[0]), .b(b[0]), .y(y[0]));
  end else begin : g_fq2
    fe_t a0, a1, b0, b1, sa, sb, v0, v1, v2;
    always_ff @(posedge clk) begin
      a0 <= a[0]; a1 <= a[1]; b0 <= b[0]; b1 <= b[1];
      sa <= mod_add(a[0], a[1], P_BASE);
      sb <= mod_add(b[0], b[1], P_BASE);
      y[0] <= mod_sub(v0, v1, P_BASE);
      y[1] <= mod_sub(v2, mod_add(v0, v1, P_BASE), P_BASE);
    end
    mont_mul #(.MOD(P_BASE), .NPRIME(NP_BASE)) u_m0 (.clk, .a(a0), .b(b0), .y(v0));
    mont_mul #(.MOD(P_BASE), .NPRIME(NP_BASE)) u_m1 (.clk, .a(a1), .b(b1), .y(v1));
    mont_mul #(.MOD(P_BASE), .NPRIME(NP_BASE)) u_m2 (.clk, .a(sa), .b(sb), .y(v2));
  end
endmodule

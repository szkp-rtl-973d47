// mont_mul: fully pipelined Montgomery modular multiplier, y = a*b*2^-256 mod M.
//
// Used for every field multiplication in the accelerator (point adders,
// NTT butterflies, element-wise unit). The paper builds its multipliers as
// Montgomery multipliers; the three-stage split below is this design's own.
//   stage 1: T = a*b                                (512 bits)
//   stage 2: m = (T mod 2^256) * M' mod 2^256,  M' = -M^-1 mod 2^256
//   stage 3: u = (T + m*M) / 2^256, y = u - M if u >= M
// Inputs must be reduced (a, b < M); the output is then reduced too.
// A new operand pair is accepted every cycle; y appears MONT_LAT = 3 cycles
// after a and b are presented. There is no stall input: the pipeline moves
// every cycle and callers track validity themselves.
module mont_mul
  import szkp_pkg::*;
#(
  parameter fe_t MOD    = P_BASE,
  parameter fe_t NPRIME = NP_BASE
) (
  input  logic clk,
  input  fe_t  a,
  input  fe_t  b,
  output fe_t  y
);
  logic [2*FW-1:0] t1, t2;
  fe_t             m2;
  logic [2*FW-1:0] mm;
  logic [2*FW:0]   u_full;
  logic [FW:0]     u;

  always_ff @(posedge clk) begin
    t1 <= a * b;
    t2 <= t1;
    m2 <= fe_t'(t1[FW-1:0] * NPRIME);
    y  <= (u >= {1'b0, MOD}) ? fe_t'(u - {1'b0, MOD}) : u[FW-1:0];
  end

  always_comb begin
    mm     = {{FW{1'b0}}, m2} * {{FW{1'b0}}, MOD};
    u_full = {1'b0, t2} + {1'b0, mm};
    u      = u_full[2*FW:FW];
  end
endmodule

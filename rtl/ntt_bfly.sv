// ntt_bfly: radix-2 butterfly over Fr with one Montgomery multiplier.
//   dit = 0 (decimation in frequency): y0 = a + b,   y1 = (a - b) * w
//   dit = 1 (decimation in time)     : y0 = a + w*b, y1 = a - w*b
// The forward NTT runs DIF (natural order in, bit-reversed order out) and
// the inverse runs DIT (bit-reversed in, natural out), so chained
// transforms never need a bit-reversal pass. Twiddles are in Montgomery
// form, data may be in either form (the product keeps the form of the data).
// Fully pipelined, latency MONT_LAT + 1 cycles, no valid or stall.
module ntt_bfly
  import szkp_pkg::*;
(
  input  logic clk,
  input  logic dit,
  input  fe_t  a,
  input  fe_t  b,
  input  fe_t  w,
  output fe_t  y0,
  output fe_t  y1
);
  fe_t ma, prod, a_d, s_d;
  logic dit_d;
  assign ma = dit ? b : mod_sub(a, b, P_SCALAR);
  mont_mul #(.MOD(P_SCALAR), .NPRIME(NP_SCALAR)) u_mul (.clk, .a(ma), .b(w), .y(prod));
  pipe_delay #(.W(2*FW+1), .N(MONT_LAT)) u_d (.clk, .d({dit, a, mod_add(a, b, P_SCALAR)}),
                                             .q({dit_d, a_d, s_d}));
  always_ff @(posedge clk) begin
    y0 <= dit_d ? mod_add(a_d, prod, P_SCALAR) : s_d;
    y1 <= dit_d ? mod_sub(a_d, prod, P_SCALAR) : prod;
  end
endmodule

// szkp_pkg: constants and types shared by the SZKP accelerator.
//
// The accelerator works on the BN128 (BN254) curve, the 254-bit curve the
// design is evaluated with. Field elements are held in 256-bit words and in
// Montgomery form with R = 2^256, so every multiplier in the design is a
// Montgomery multiplier. Two prime fields are used:
//   * Fq (P_BASE)   : coordinates of G1 points; G2 coordinates live in
//                     Fq2 = Fq[u]/(u^2+1).
//   * Fr (P_SCALAR) : scalars and the NTT data (polynomial coefficients).
// Points are projective (X:Y:Z); the point at infinity is (0:1:0).
// The curve constants b3 = 3*b (G1: b = 3, G2 twist: b' = 3/(9+u)) are
// stored already in Montgomery form, as the point adder needs them.
package szkp_pkg;

  localparam int FW     = 256;   // storage width of one field element
  localparam int LAMBDA = 254;   // scalar bit width (BN128)

  typedef logic [FW-1:0] fe_t;

  // Fq, the base field of BN128
  localparam fe_t P_BASE    = 256'h30644e72e131a029b85045b68181585d97816a916871ca8d3c208c16d87cfd47;
  localparam fe_t NP_BASE   = 256'hf57a22b791888c6bd8afcbd01833da809ede7d651eca6ac987d20782e4866389; // -p^-1 mod 2^256
  localparam fe_t ONE_BASE  = 256'h0e0a77c19a07df2f666ea36f7879462c0a78eb28f5c70b3dd35d438dc58f0d9d; // R mod p
  // Fr, the scalar field of BN128 (NTT field)
  localparam fe_t P_SCALAR   = 256'h30644e72e131a029b85045b68181585d2833e84879b9709143e1f593f0000001;
  localparam fe_t NP_SCALAR  = 256'h73f82f1d0d8341b2e39a9828990623916586864b4c6911b3c2e1f593efffffff;
  localparam fe_t ONE_SCALAR = 256'h0e0a77c19a07df2f666ea36f7879462e36fc76959f60cd29ac96341c4ffffffb; // R mod r
  // b3 = 3*b in Montgomery form
  localparam fe_t B3_G1    = 256'h1d9598e8a7e398572943337e3940c6d12f3d6f4dd31bd011f60647ce410d7ff7; // 9
  localparam fe_t B3_G2_C0 = 256'h0e75b5b1082ab8f403873e63d95d4664d71e7c52d1b664fd3baa927cb62e0d6a; // 9/(9+u), real part
  localparam fe_t B3_G2_C1 = 256'h03c52d6adf39a7e985dd7297680401ff31d21a78bb6a27baaab7c6667596fe35; // 9/(9+u), u part

  // Latency of one Montgomery multiplication (mont_mul) and of one field
  // multiplication in Fq (EXT=1) or Fq2 (EXT=2, Karatsuba with an add stage
  // before and after).
  localparam int MONT_LAT = 3;
  function automatic int fe_mul_lat(int ext);
    return (ext == 1) ? MONT_LAT : MONT_LAT + 2;
  endfunction

  // Internal depth of ec_padd before its padding to the requested latency:
  // one add stage, three multiplier banks, three add stages.
  function automatic int padd_core_lat(int ext, int ii);
    return 4 + 3 * (1 + ii + fe_mul_lat(ext));
  endfunction

  // Latencies of Table 1 (254-bit PADDs): 30 cycles for G1, 55 for G2.
  localparam int G1_PADD_LAT = 30;
  localparam int G2_PADD_LAT = 55;

  function automatic fe_t mod_add(fe_t a, fe_t b, fe_t m);
    logic [FW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, m}) s = s - {1'b0, m};
    return s[FW-1:0];
  endfunction

  function automatic fe_t mod_sub(fe_t a, fe_t b, fe_t m);
    return (a >= b) ? a - b : a + (m - b);
  endfunction

  // Bucket dispatch policies of an MSM PE (Sec. "Round-Robin Scheduling",
  // "Longest Queue Policy").
  typedef enum logic [1:0] {POL_RR = 2'd0, POL_MAXR = 2'd1, POL_LQ = 2'd2} policy_e;

  // Commands of an MSM PE.
  typedef enum logic [1:0] {
    PE_CLEAR  = 2'd0,   // mark every bucket of a window slot empty
    PE_ACCUM  = 2'd1,   // push the scalars of the bound bank into buckets
    PE_REDUCE = 2'd2,   // bucket reduction of one slot (Algorithm 1)
    PE_WINRED = 2'd3    // acc <- 2^k * acc + addend (window reduction step)
  } pe_op_e;

  // Element-wise arithmetic unit operations of the NTT PE.
  typedef enum logic [1:0] {
    EW_PASS = 2'd0,     // y = x * g
    EW_MUL  = 2'd1,     // y = x * op * g
    EW_SUB  = 2'd2      // y = (op - x) * g
  } ew_op_e;

endpackage

// sparse_msm_core: MSM for the sparse Groth16 MSMs, whose scalars are mostly
// 0 or 1 and (for two of them) whose points are often the point at infinity.
//
// Each incoming (scalar, point) pair is classified:
//   scalar 0 or point at infinity (Z = 0) -> dropped;
//   scalar 1                              -> written into the ones buffer;
//   anything else                         -> forwarded to a Pippenger engine
//                                            (dense_msm_core) with the same
//                                            structure as the dense MSM.
// The ones buffer is a circular point memory. While at least two points are
// in it, two are read, added by the PADD and the sum is written back, so the
// adder stays busy until a single point is left. When the Pippenger engine
// finishes, its result is written into the same buffer and folded in the
// same way; the last remaining point is the MSM result.
// The paper names this core for G1 (EXT=1) and, with pairs of coordinates,
// for G2 (EXT=2); both are this module. The ones adder is a PADD of its own
// here, next to the PE adders of the Pippenger part (this design's choice).
// Input handshake: ld_valid/ld_ready, ld_last on the final pair. ld_ready
// can depend on the class of the offered pair. The result pulses res_valid.
module sparse_msm_core
  import szkp_pkg::*;
#(
  parameter int      EXT      = 1,
  parameter int      KM       = 8,
  parameter int      W        = 7,
  parameter int      PPW      = 1024,
  parameter int      II       = 4,
  parameter int      D        = 32,
  parameter policy_e POLICY   = POL_LQ,
  parameter int      MAXR     = 8,
  parameter int      PADD_LAT = G1_PADD_LAT,
  parameter int      SBITS    = LAMBDA,
  parameter int      QD       = PPW
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         ld_valid,
  output logic                         ld_ready,
  input  logic                         ld_last,
  input  logic [FW-1:0]                ld_scalar,
  input  logic [2:0][EXT-1:0][FW-1:0]  ld_point,
  output logic                         res_valid,
  output logic [2:0][EXT-1:0][FW-1:0]  res_point,
  output logic                         busy,
  // events
  output logic                         ev_zero,     // pair dropped
  output logic                         ev_one,      // pair with scalar 1
  output logic                         ev_dense,    // pair sent to Pippenger
  output logic                         ev_fold,     // two buffered points added
  output logic [KM-1:0]                ev_stall
);
  typedef logic [2:0][EXT-1:0][FW-1:0] pt_t;
  localparam int QW = $clog2(QD);
  localparam int CW = $clog2(QD + 1);

  function automatic pt_t inf_pt();
    pt_t p = '0;
    p[1][0] = ONE_BASE;
    return p;
  endfunction

  // ---- classification -------------------------------------------------------------
  logic is_zero, is_one, is_dense;
  always_comb begin
    is_zero  = ld_scalar == '0 || ld_point[2] == '0;
    is_one   = !is_zero && ld_scalar == fe_t'(1);
    is_dense = !is_zero && !is_one;
  end

  // ---- Pippenger engine ---------------------------------------------------------------
  logic d_valid, d_ready, d_res_valid, d_busy, d_batch;
  pt_t  d_res;
  logic [KM-1:0] d_bubble, d_issue;
  dense_msm_core #(.EXT(EXT), .KM(KM), .W(W), .PPW(PPW), .II(II), .D(D), .POLICY(POLICY),
                   .MAXR(MAXR), .PADD_LAT(PADD_LAT), .SBITS(SBITS)) u_pip (
    .clk, .rst, .ld_valid(d_valid), .ld_ready(d_ready), .ld_keep(is_dense), .ld_last,
    .ld_scalar, .ld_point, .res_valid(d_res_valid), .res_point(d_res), .busy(d_busy),
    .ev_stall, .ev_bubble(d_bubble), .ev_issue(d_issue), .ev_batch(d_batch));

  // ---- ones buffer and its adder ---------------------------------------------------------
  pt_t           qm [QD];
  logic [QW-1:0] qh, qt;
  logic [CW-1:0] qc;
  int            inflight;
  logic          in_done, d_done, d_pend;
  pt_t           d_hold;

  logic room;
  assign room = int'(qc) + inflight + 2 <= QD;

  always_comb begin
    // a pair goes to the Pippenger engine when dense, and the final pair always
    // does (possibly as an empty beat) so that the engine sees the end
    d_valid  = ld_valid && !in_done && (is_dense || ld_last) && (!is_one || room);
    ld_ready = !in_done && ((is_dense || ld_last) ? d_ready && (!is_one || room)
                                                  : (is_zero || room));
  end

  logic acc_one;
  assign acc_one = ld_valid && ld_ready && is_one;
  assign ev_zero  = ld_valid && ld_ready && is_zero;
  assign ev_one   = acc_one;
  assign ev_dense = ld_valid && ld_ready && is_dense;

  logic p_in_ready, p_out_valid, fold;
  pt_t  p_sum;
  logic [0:0] p_tag;
  assign fold    = qc >= 2 && p_in_ready;
  assign ev_fold = fold;

  ec_padd #(.EXT(EXT), .II(II), .LATENCY(PADD_LAT), .TAGW(1)) u_padd (
    .clk, .rst, .in_valid(fold), .in_ready(p_in_ready), .p1(qm[qh]), .p2(qm[QW'(qh + 1'b1)]),
    .in_tag(1'b0), .out_valid(p_out_valid), .sum(p_sum), .out_tag(p_tag));

  assign busy = in_done || qc != 0 || inflight != 0;

  always_ff @(posedge clk) begin
    res_valid <= 1'b0;
    if (rst) begin
      qh <= '0; qt <= '0; qc <= '0; inflight <= 0;
      in_done <= 1'b0; d_done <= 1'b0; d_pend <= 1'b0;
    end else begin
      logic [QW-1:0] t;
      logic [CW-1:0] c;
      t = qt;
      c = qc;
      // writes: input point, adder result, Pippenger result (lowest priority)
      if (acc_one)     begin qm[t] <= ld_point; t = t + 1'b1; c = c + 1'b1; end
      if (p_out_valid) begin qm[t] <= p_sum;    t = t + 1'b1; c = c + 1'b1; end
      if (d_pend && !acc_one && !p_out_valid) begin
        qm[t] <= d_hold; t = t + 1'b1; c = c + 1'b1;
        d_pend <= 1'b0;
        d_done <= 1'b1;
      end
      if (fold) begin qh <= qh + 2'd2; c = c - 2'd2; end
      qt <= t;
      qc <= c;
      inflight <= inflight + (fold ? 1 : 0) - (p_out_valid ? 1 : 0);

      if (ld_valid && ld_ready && ld_last) in_done <= 1'b1;
      if (d_res_valid) begin d_hold <= d_res; d_pend <= 1'b1; end

      // finished: input and Pippenger part done, nothing in flight, <= 1 point left
      if (in_done && d_done && !d_pend && inflight == 0 && !fold && !p_out_valid && qc <= 1) begin
        res_valid <= 1'b1;
        res_point <= (qc == 1) ? qm[qh] : inf_pt();
        qh <= '0; qt <= '0; qc <= '0;
        in_done <= 1'b0;
        d_done  <= 1'b0;
      end
    end
  end
endmodule

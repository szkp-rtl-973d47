// szkp_top: the SZKP chip datapath for BN254 Groth16 proof generation.
//
// Contents (one instance each unless noted):
//   * NTT core   - NTT_KN constant-geometry NTT PEs (ntt_pe) with NTT_U
//                  butterflies each and up to NTT_NMAX points per transform.
//                  As in the paper, the PEs work on independent rows/columns
//                  of a four-step NTT, so they share configuration, twiddle
//                  and generator tables and have their own data streams.
//   * Dense MSM  - G1 Pippenger core (dense_msm_core), (K_M, W, PPW, II) =
//                  (DN_KM, DN_W, DN_PPW, DN_II).
//   * Sparse G1  - sparse_msm_core (EXT = 1); the three sparse G1 MSMs are
//                  run one after another on it.
//   * Sparse G2  - sparse_msm_core (EXT = 2), PADD latency 55.
// Parameter defaults are listed with their origin in the documentation; the
// sparse G2 core is (1, 5, 1024, 4), the setting the paper uses for it in
// all of its bandwidth-aware designs.
//
// Not in this module (see the documentation): the off-chip memory (HBM or
// DDR) and its fetch/prefetch/write-back engines, the four-step sequencing
// (transpose and the order of column/row passes), and the final proof
// construction. Their interfaces are the streams brought out here: every
// core's input stream is a valid/ready port fed from "off-chip memory", and
// every result is an output port for the proof assembly.
//
// Port groups (all plain signals):
//   ntt_*  : broadcast configuration and tables, per-PE in/out streams
//   dn_*   : dense MSM stream (scalar, point, keep, last) and result
//   sg1_*  : sparse G1 MSM stream and result
//   sg2_*  : sparse G2 MSM stream and result (points are Fq2 pairs)
//   ev_*   : event strobes (stalls, bubbles, batches, folds, ...) used for
//            performance counting; no function depends on them.
// Timing of each group is that of the instantiated block.
module szkp_top
  import szkp_pkg::*;
#(
  parameter int      NTT_KN   = 8,
  parameter int      NTT_U    = 32,
  parameter int      NTT_NMAX = 1024,
  parameter int      DN_KM    = 16,
  parameter int      DN_W     = 8,
  parameter int      DN_PPW   = 16384,
  parameter int      DN_II    = 1,
  parameter int      SG1_KM   = 8,
  parameter int      SG1_W    = 7,
  parameter int      SG1_PPW  = 1024,
  parameter int      SG1_II   = 4,
  parameter int      SG2_KM   = 1,
  parameter int      SG2_W    = 5,
  parameter int      SG2_PPW  = 1024,
  parameter int      SG2_II   = 4,
  parameter int      MSM_D    = 32,
  parameter policy_e POLICY   = POL_LQ,
  parameter int      SBITS    = LAMBDA
) (
  input  logic                                   clk,
  input  logic                                   rst,
  // ---- NTT core ----
  input  logic                                   ntt_start,
  input  logic [4:0]                             ntt_logn,
  input  logic                                   ntt_dit,
  input  ew_op_e                                 ntt_ew_op,
  input  logic                                   ntt_op_store,
  input  fe_t                                    ntt_gen_step,
  output logic [NTT_KN-1:0]                      ntt_busy,
  input  logic                                   ntt_tw_wr_en,
  input  logic [$clog2(NTT_NMAX)-2:0]            ntt_tw_wr_addr,
  input  fe_t                                    ntt_tw_wr_data,
  input  logic                                   ntt_gen_wr_en,
  input  logic [$clog2(NTT_U)+1:0]               ntt_gen_wr_idx,
  input  fe_t                                    ntt_gen_wr_data,
  input  logic [NTT_KN-1:0]                      ntt_op_wr_en,
  input  logic [$clog2(NTT_NMAX/NTT_U)-1:0]      ntt_op_wr_row,
  input  logic [NTT_U-1:0][FW-1:0]               ntt_op_wr_data,
  input  logic [NTT_KN-1:0]                      ntt_in_valid,
  input  logic [NTT_KN-1:0][NTT_U-1:0][FW-1:0]   ntt_in_data,
  output logic [NTT_KN-1:0]                      ntt_out_valid,
  output logic [NTT_KN-1:0][NTT_U-1:0][FW-1:0]   ntt_out_data,
  // ---- dense G1 MSM ----
  input  logic                                   dn_valid,
  output logic                                   dn_ready,
  input  logic                                   dn_keep,
  input  logic                                   dn_last,
  input  fe_t                                    dn_scalar,
  input  logic [2:0][0:0][FW-1:0]                dn_point,
  output logic                                   dn_res_valid,
  output logic [2:0][0:0][FW-1:0]                dn_res_point,
  output logic                                   dn_busy,
  // ---- sparse G1 MSM ----
  input  logic                                   sg1_valid,
  output logic                                   sg1_ready,
  input  logic                                   sg1_last,
  input  fe_t                                    sg1_scalar,
  input  logic [2:0][0:0][FW-1:0]                sg1_point,
  output logic                                   sg1_res_valid,
  output logic [2:0][0:0][FW-1:0]                sg1_res_point,
  output logic                                   sg1_busy,
  // ---- sparse G2 MSM ----
  input  logic                                   sg2_valid,
  output logic                                   sg2_ready,
  input  logic                                   sg2_last,
  input  fe_t                                    sg2_scalar,
  input  logic [2:0][1:0][FW-1:0]                sg2_point,
  output logic                                   sg2_res_valid,
  output logic [2:0][1:0][FW-1:0]                sg2_res_point,
  output logic                                   sg2_busy,
  // ---- events ----
  output logic [NTT_KN-1:0]                      ev_ntt_stage,
  output logic [DN_KM-1:0]                       ev_dn_stall,
  output logic [DN_KM-1:0]                       ev_dn_bubble,
  output logic [DN_KM-1:0]                       ev_dn_issue,
  output logic                                   ev_dn_batch,
  output logic [3:0]                             ev_sg1,    // {fold, dense, one, zero}
  output logic [SG1_KM-1:0]                      ev_sg1_stall,
  output logic [3:0]                             ev_sg2,    // {fold, dense, one, zero}
  output logic [SG2_KM-1:0]                      ev_sg2_stall
);
  // ---- NTT core: K_N PEs, shared configuration and tables ----
  logic [NTT_KN-1:0] ntt_stage_k;
  for (genvar k = 0; k < NTT_KN; k++) begin : g_ntt
    ntt_pe #(.U(NTT_U), .NMAX(NTT_NMAX)) u_pe (
      .clk, .rst,
      .start(ntt_start), .cfg_logn(ntt_logn), .cfg_dit(ntt_dit), .cfg_ew_op(ntt_ew_op),
      .cfg_op_store(ntt_op_store), .cfg_gen_step(ntt_gen_step), .busy(ntt_busy[k]),
      .tw_wr_en(ntt_tw_wr_en), .tw_wr_addr(ntt_tw_wr_addr), .tw_wr_data(ntt_tw_wr_data),
      .op_wr_en(ntt_op_wr_en[k]), .op_wr_row(ntt_op_wr_row), .op_wr_data(ntt_op_wr_data),
      .gen_wr_en(ntt_gen_wr_en), .gen_wr_idx(ntt_gen_wr_idx), .gen_wr_data(ntt_gen_wr_data),
      .in_valid(ntt_in_valid[k]), .in_data(ntt_in_data[k]),
      .out_valid(ntt_out_valid[k]), .out_data(ntt_out_data[k]), .ev_stage(ntt_stage_k[k]));
  end
  assign ev_ntt_stage = ntt_stage_k;

  // ---- dense G1 MSM ----
  dense_msm_core #(.EXT(1), .KM(DN_KM), .W(DN_W), .PPW(DN_PPW), .II(DN_II), .D(MSM_D), .POLICY(POLICY),
                   .PADD_LAT(G1_PADD_LAT), .SBITS(SBITS)) u_dense (
    .clk, .rst, .ld_valid(dn_valid), .ld_ready(dn_ready), .ld_keep(dn_keep), .ld_last(dn_last),
    .ld_scalar(dn_scalar), .ld_point(dn_point), .res_valid(dn_res_valid),
    .res_point(dn_res_point), .busy(dn_busy), .ev_stall(ev_dn_stall),
    .ev_bubble(ev_dn_bubble), .ev_issue(ev_dn_issue), .ev_batch(ev_dn_batch));

  // ---- sparse G1 MSM ----
  sparse_msm_core #(.EXT(1), .KM(SG1_KM), .W(SG1_W), .PPW(SG1_PPW), .II(SG1_II), .D(MSM_D),
                    .POLICY(POLICY), .PADD_LAT(G1_PADD_LAT), .SBITS(SBITS)) u_sg1 (
    .clk, .rst, .ld_valid(sg1_valid), .ld_ready(sg1_ready), .ld_last(sg1_last),
    .ld_scalar(sg1_scalar), .ld_point(sg1_point), .res_valid(sg1_res_valid),
    .res_point(sg1_res_point), .busy(sg1_busy), .ev_zero(ev_sg1[0]), .ev_one(ev_sg1[1]),
    .ev_dense(ev_sg1[2]), .ev_fold(ev_sg1[3]), .ev_stall(ev_sg1_stall));

  // ---- sparse G2 MSM ----
  sparse_msm_core #(.EXT(2), .KM(SG2_KM), .W(SG2_W), .PPW(SG2_PPW), .II(SG2_II), .D(MSM_D),
                    .POLICY(POLICY), .PADD_LAT(G2_PADD_LAT), .SBITS(SBITS)) u_sg2 (
    .clk, .rst, .ld_valid(sg2_valid), .ld_ready(sg2_ready), .ld_last(sg2_last),
    .ld_scalar(sg2_scalar), .ld_point(sg2_point), .res_valid(sg2_res_valid),
    .res_point(sg2_res_point), .busy(sg2_busy), .ev_zero(ev_sg2[0]), .ev_one(ev_sg2[1]),
    .ev_dense(ev_sg2[2]), .ev_fold(ev_sg2[3]), .ev_stall(ev_sg2_stall));
endmodule

// dense_msm_core: multi-PE MSM engine, sum_j s_j * P_j, by Pippenger's
// algorithm with W-bit windows.
//
// Structure (paper, "Scaling to Multiple PEs"): KM msm_pe instances, the
// scalar and point buffers split into KM banks of PPW/KM entries, and the
// rotating msm_xbar between them. In round j PE i reads bank (i+j) mod KM;
// after KM rounds every PE has seen every point of the batch for its window.
// A PE owns windows i, i+KM, i+2KM, ... (NSLOT slots of bucket registers),
// so all NWIN = ceil(LAMBDA/W) windows of a batch are processed before the
// next batch of up to PPW points is loaded; bucket sums stay on chip
// between batches.
//
// Sequence for one MSM:
//   CLEAR   all bucket registers;
//   LOAD    up to PPW (scalar, point) pairs; element e goes to bank e mod KM,
//           row e / KM. ld_keep = 0 carries no element; ld_last ends the MSM;
//   ACCUM   NSLOT x KM rounds, all PEs in lock-step (a round ends when the
//           slowest PE has finished); back to LOAD unless ld_last was seen;
//   REDUCE  each PE reduces its windows (Algorithm 1), giving window sums S_w;
//   WINDOW  Horner from the most significant window: acc = 2^W acc + S_w,
//           done by the PADD of PE 0 (doublings, then one addition);
//   result on res_point with res_valid.
// The paper spreads the window-reduction doublings over the PEs; here they
// run on PE 0 only (this design's simplification, latency about
// NWIN * (W+1) * t_add instead of the paper's estimate).
// Points are projective Montgomery (as ec_padd); scalars are plain integers.
// Lint note: Verilator reports UNOPTFLAT on pe_sc_en. The request
// vectors pe_sc_en/bk_sc_en and the returned data pe_sc_data are packed
// over all PEs, so the tool sees a loop pe_sc_en -> crossbar -> bank ->
// pe_sc_data -> msm_pe -> pe_sc_en. The bank read data is registered, so
// there is no real combinational loop; the warning only costs simulation
// speed.
module dense_msm_core
  import szkp_pkg::*;
#(
  parameter int      EXT      = 1,
  parameter int      KM       = 16,
  parameter int      W        = 8,
  parameter int      PPW      = 16384,
  parameter int      II       = 1,
  parameter int      D        = 32,
  parameter policy_e POLICY   = POL_LQ,
  parameter int      MAXR     = 8,
  parameter int      PADD_LAT = G1_PADD_LAT,
  parameter int      SBITS    = LAMBDA
) (
  input  logic                         clk,
  input  logic                         rst,
  // input stream
  input  logic                         ld_valid,
  output logic                         ld_ready,
  input  logic                         ld_keep,
  input  logic                         ld_last,
  input  logic [FW-1:0]                ld_scalar,
  input  logic [2:0][EXT-1:0][FW-1:0]  ld_point,
  // result
  output logic                         res_valid,
  output logic [2:0][EXT-1:0][FW-1:0]  res_point,
  output logic                         busy,
  // events (one bit per PE and cycle)
  output logic [KM-1:0]                ev_stall,
  output logic [KM-1:0]                ev_bubble,
  output logic [KM-1:0]                ev_issue,
  output logic                         ev_batch      // a batch was started
);
  localparam int NWIN  = (SBITS + W - 1) / W;
  localparam int NSLOT = (NWIN + KM - 1) / KM;
  localparam int BD    = PPW / KM;
  localparam int AW    = $clog2(BD);
  localparam int NW    = $clog2(BD + 1);
  localparam int SLW   = $clog2(NSLOT + 1);
  localparam int PW    = 3 * EXT * FW;
  localparam int RW    = $clog2(KM + 1);
  localparam int KBW   = KM > 1 ? $clog2(KM) : 1;   // load bank counter width
  typedef logic [2:0][EXT-1:0][FW-1:0] pt_t;

  function automatic pt_t inf_pt();
    pt_t p = '0;
    p[1][0] = ONE_BASE;
    return p;
  endfunction

  typedef enum logic [3:0] {
    S_CLR, S_LOAD, S_ACC, S_ACCW, S_RED, S_REDW, S_WIN, S_WINW, S_DONE
  } state_e;
  state_e state;

  // ---- banked buffers ----------------------------------------------------------
  fe_t  sc_mem [KM][BD];
  pt_t  pt_mem [KM][BD];

  logic [KM-1:0]              pe_sc_en, bk_sc_en, pe_pt_en, bk_pt_en;
  logic [KM-1:0][1:0][AW-1:0] pe_sc_addr, bk_sc_addr;
  logic [KM-1:0][1:0][FW-1:0] pe_sc_data, bk_sc_data;
  logic [KM-1:0][AW-1:0]      pe_pt_addr, bk_pt_addr;
  logic [KM-1:0][PW-1:0]      pe_pt_data, bk_pt_data;
  logic [RW-1:0]              rot;

  msm_xbar #(.KM(KM), .AW(AW), .SW(FW), .PW(PW)) u_xbar (
    .rot, .pe_sc_en, .pe_sc_addr, .pe_sc_data, .pe_pt_en, .pe_pt_addr, .pe_pt_data,
    .bk_sc_en, .bk_sc_addr, .bk_sc_data, .bk_pt_en, .bk_pt_addr, .bk_pt_data);

  // load position
  logic [$clog2(PPW+1)-1:0] nload;
  logic [KBW-1:0]           ld_bank;
  logic [AW-1:0]            ld_row;
  logic                     ld_fire;
  assign ld_ready = state == S_LOAD && nload < ($clog2(PPW+1))'(PPW);
  assign ld_fire  = ld_valid && ld_ready && ld_keep;

  for (genvar b = 0; b < KM; b++) begin : g_bank
    // port A: the PE's two scalar reads, or the load write; port B: point read
    always_ff @(posedge clk) begin
      if (bk_sc_en[b]) begin
        bk_sc_data[b][0] <= sc_mem[b][bk_sc_addr[b][0]];
        bk_sc_data[b][1] <= sc_mem[b][bk_sc_addr[b][1]];
      end
      if (bk_pt_en[b]) bk_pt_data[b] <= pt_mem[b][bk_pt_addr[b]];
      if (ld_fire && int'(ld_bank) == b) begin
        sc_mem[b][ld_row] <= ld_scalar;
        pt_mem[b][ld_row] <= ld_point;
      end
    end
  end

  // ---- PEs ----------------------------------------------------------------------
  logic [KM-1:0]      cmd_valid, cmd_ready, res_v;
  pe_op_e             cmd_op;
  logic [SLW-1:0]     cmd_slot;
  logic [KM-1:0][7:0] cmd_off;
  logic [KM-1:0][NW-1:0] cmd_n;
  logic [8:0]         cmd_k;
  pt_t                cmd_pa, cmd_pb;
  pt_t                pe_res [KM];

  for (genvar i = 0; i < KM; i++) begin : g_pe
    msm_pe #(.EXT(EXT), .W(W), .D(D), .NSLOT(NSLOT), .BANK_DEPTH(BD), .POLICY(POLICY),
             .MAXR(MAXR), .II(II), .PADD_LAT(PADD_LAT)) u_pe (
      .clk, .rst,
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd_op, .cmd_slot,
      .cmd_off(cmd_off[i]), .cmd_n(cmd_n[i]), .cmd_k, .cmd_pa, .cmd_pb,
      .sc_rd_en(pe_sc_en[i]), .sc_rd_addr(pe_sc_addr[i]), .sc_rd_data(pe_sc_data[i]),
      .pt_rd_en(pe_pt_en[i]), .pt_rd_addr(pe_pt_addr[i]), .pt_rd_data(pe_pt_data[i]),
      .res_valid(res_v[i]), .res_point(pe_res[i]),
      .ev_stall(ev_stall[i]), .ev_bubble(ev_bubble[i]), .ev_issue(ev_issue[i]));
  end

  // ---- control ---------------------------------------------------------------------
  logic [SLW-1:0]            s;          // slot (window group)
  logic [RW-1:0]             j;          // round
  logic                      final_b;    // last batch of this MSM
  logic [$clog2(NWIN+1)-1:0] wi;         // window in the window reduction
  pt_t                       wsum [NWIN];
  pt_t                       acc;
  logic [KM-1:0]             got;

  assign busy = state != S_LOAD || nload != 0;

  // windows and per-bank element counts of the current command
  always_comb begin
    for (int i = 0; i < KM; i++) begin
      int w, b;
      w = int'(s) * KM + i;
      b = (i + int'(j)) % KM;
      cmd_off[i] = 8'(w * W);
      cmd_n[i]   = NW'(int'(nload) / KM + ((b < int'(nload) % KM) ? 1 : 0));
      cmd_valid[i] = w < NWIN && (state == S_CLR || state == S_ACC || state == S_RED);
      if (state == S_WIN) cmd_valid[i] = (i == 0);
    end
    cmd_slot = s;
    cmd_k    = (int'(wi) == NWIN - 1) ? 9'd0 : 9'(W);
    cmd_pa   = acc;
    cmd_pb   = wsum[wi];
    case (state)
      S_CLR:   cmd_op = PE_CLEAR;
      S_ACC:   cmd_op = PE_ACCUM;
      S_RED:   cmd_op = PE_REDUCE;
      default: cmd_op = PE_WINRED;
    endcase
  end
  assign rot = j;

  always_ff @(posedge clk) begin
    res_valid <= 1'b0;
    ev_batch  <= 1'b0;
    if (rst) begin
      state   <= S_CLR;
      s       <= '0;
      j       <= '0;
      nload   <= '0;
      final_b <= 1'b0;
      got     <= '0;
    end else begin
      case (state)
        S_CLR: begin                       // every PE is idle here
          if (int'(s) == NSLOT - 1) begin
            s <= '0; state <= S_LOAD; nload <= '0; ld_bank <= '0; ld_row <= '0;
          end
          else s <= s + 1'b1;
        end
        S_LOAD: begin
          if (ld_fire) begin
            ld_bank <= ld_bank + 1'b1;
            if (int'(ld_bank) == KM - 1) begin ld_bank <= '0; ld_row <= ld_row + 1'b1; end
            nload <= nload + 1'b1;
          end
          if ((ld_valid && ld_ready && ld_last) ||
              (nload == ($clog2(PPW+1))'(PPW))) begin
            final_b  <= ld_valid && ld_ready && ld_last;
            s        <= '0;
            j        <= '0;
            ev_batch <= 1'b1;
            state    <= S_ACC;
          end
        end
        S_ACC:  state <= S_ACCW;           // commands taken by the idle PEs
        S_ACCW: if (&cmd_ready) begin
          if (int'(j) == KM - 1) begin
            j <= '0;
            if (int'(s) == NSLOT - 1) begin
              s <= '0;
              if (final_b) state <= S_RED;
              else begin state <= S_LOAD; nload <= '0; ld_bank <= '0; ld_row <= '0; end
            end else begin
              s <= s + 1'b1; state <= S_ACC;
            end
          end else begin
            j <= j + 1'b1; state <= S_ACC;
          end
        end
        S_RED: begin got <= '0; state <= S_REDW; end
        S_REDW: begin
          logic [KM-1:0] g;
          g = got;
          for (int i = 0; i < KM; i++) begin
            if (res_v[i]) begin
              wsum[int'(s) * KM + i] <= pe_res[i];
              g[i] = 1'b1;
            end
            if (int'(s) * KM + i >= NWIN) g[i] = 1'b1;
          end
          got <= g;
          if (&g && &cmd_ready) begin
            if (int'(s) == NSLOT - 1) begin
              wi    <= ($clog2(NWIN+1))'(NWIN - 1);
              acc   <= inf_pt();
              state <= S_WIN;
            end else begin
              s <= s + 1'b1; state <= S_RED;
            end
          end
        end
        S_WIN:  state <= S_WINW;
        S_WINW: if (res_v[0]) begin
          acc <= pe_res[0];
          if (wi == 0) begin
            res_point <= pe_res[0];
            res_valid <= 1'b1;
            state     <= S_DONE;
          end else begin
            wi    <= wi - 1'b1;
            state <= S_WIN;
          end
        end
        default: begin s <= '0; state <= S_CLR; end
      endcase
    end
  end
endmodule

// msm_pe: one processing element of the Pippenger MSM engine.
//
// The PE works on one W-bit window of the scalars at a time. It follows the
// five-stage pipeline of the paper's dense-MSM PE:
//   1. fetch scalars : two consecutive scalars per cycle from the bound
//                      scalar bank (addresses a and a+1, 1-cycle read);
//   2. push          : the W-bit digit of each scalar selects a bucket and
//                      the scalar's *address* (not the point) is pushed into
//                      that bucket's queue (depth D). Digit 0 is skipped. If
//                      either push cannot be done (queue full) neither is,
//                      and the pair is fetched again (a stall);
//   3. pop           : bucket_sched chooses a bucket (RR, Max-r or longest
//                      queue); its oldest address is popped together with the
//                      bucket's accumulated sum;
//   4. fetch point   : the point at that address is read from the point bank;
//   5. execute/write : the pipelined PADD adds point and bucket sum; the sum
//                      is written back into the bucket's register when it
//                      leaves the adder (write-backs always succeed).
// A bucket with an addition in flight is not eligible, so an accumulator is
// never read before its previous update has been written.
// The bucket registers of NSLOT windows are kept (slot = window handled by
// this PE), so a long MSM can be streamed through the point buffer in
// batches while the partial bucket sums stay on chip.
//
// Commands (cmd_valid while cmd_ready):
//   PE_CLEAR  slot        : all buckets of the slot become the point at infinity.
//   PE_ACCUM  slot,off,n  : process scalars 0..n-1 of the bank, digit = bits
//                           off .. off+W-1. Ends when every addition is written back.
//   PE_REDUCE slot        : bucket reduction, sum_i i*B_i, by Algorithm 1 of the
//                           paper (running sum and total, two serial additions per
//                           bucket, 2*t_add*(2^W-1) cycles). Result on res_point.
//   PE_WINRED k,pa,pb     : res = 2^k * pa + pb, k doublings then one addition
//                           (the window-reduction step).
// cmd_ready is high when the PE is idle; res_valid pulses with a result.
// Event outputs count stalls (failed pushes), bubbles (adder slot with no
// eligible bucket while work is queued) and issued additions.
module msm_pe
  import szkp_pkg::*;
#(
  parameter int      EXT        = 1,
  parameter int      W          = 8,
  parameter int      D          = 32,
  parameter int      NSLOT      = 2,
  parameter int      BANK_DEPTH = 1024,
  parameter policy_e POLICY     = POL_LQ,
  parameter int      MAXR       = 8,
  parameter int      II         = 1,
  parameter int      PADD_LAT   = G1_PADD_LAT
) (
  input  logic                              clk,
  input  logic                              rst,
  // command
  input  logic                              cmd_valid,
  output logic                              cmd_ready,
  input  pe_op_e                            cmd_op,
  input  logic [$clog2(NSLOT+1)-1:0]        cmd_slot,
  input  logic [7:0]                        cmd_off,
  input  logic [$clog2(BANK_DEPTH+1)-1:0]   cmd_n,
  input  logic [8:0]                        cmd_k,
  input  logic [2:0][EXT-1:0][FW-1:0]       cmd_pa,
  input  logic [2:0][EXT-1:0][FW-1:0]       cmd_pb,
  // scalar bank (two reads per cycle, data one cycle later)
  output logic                              sc_rd_en,
  output logic [1:0][$clog2(BANK_DEPTH)-1:0] sc_rd_addr,
  input  logic [1:0][FW-1:0]                sc_rd_data,
  // point bank (one read per cycle, data one cycle later)
  output logic                              pt_rd_en,
  output logic [$clog2(BANK_DEPTH)-1:0]     pt_rd_addr,
  input  logic [2:0][EXT-1:0][FW-1:0]       pt_rd_data,
  // result
  output logic                              res_valid,
  output logic [2:0][EXT-1:0][FW-1:0]       res_point,
  // events
  output logic                              ev_stall,
  output logic                              ev_bubble,
  output logic                              ev_issue
);
  localparam int NB  = (1 << W) - 1;
  localparam int BW  = $clog2(NB);
  localparam int AW  = $clog2(BANK_DEPTH);
  localparam int NW  = $clog2(BANK_DEPTH + 1);
  localparam int QPW = $clog2(D);
  localparam int CW  = $clog2(D + 1);
  localparam int SW  = $clog2(NSLOT + 1);
  typedef logic [2:0][EXT-1:0][FW-1:0] pt_t;

  function automatic pt_t inf_pt();
    pt_t p = '0;
    p[1][0] = ONE_BASE;       // (0 : 1 : 0) in Montgomery form
    return p;
  endfunction

  typedef enum logic [3:0] {
    S_IDLE, S_ACC, S_RED_A, S_RED_AW, S_RED_B, S_RED_BW, S_WR_D, S_WR_DW, S_WR_A, S_WR_AW
  } state_e;
  state_e state;

  // ---- storage --------------------------------------------------------------
  pt_t                    acc   [NSLOT*NB];       // bucket accumulation registers
  logic [NSLOT*NB-1:0]    acc_v;                  // bucket holds a value (else infinity)
  logic [AW-1:0]          qmem  [NB*D];           // per-bucket address queues
  logic [NB-1:0][QPW-1:0] qhead, qtail;
  logic [NB-1:0][CW-1:0]  qcnt;
  logic [NB-1:0]          busy;                   // addition in flight

  logic [SW-1:0] slot;
  logic [7:0]    off;
  logic [NW-1:0] n;
  logic [8:0]    kleft;
  logic [BW:0]   ridx;                            // bucket index 1..NB in reduction
  pt_t           sr, st, opb;
  int            inflight;

  // ---- adder ----------------------------------------------------------------
  logic    pa_in_valid, pa_in_ready, pa_out_valid;
  pt_t     pa_p1, pa_p2, pa_sum;
  logic [BW-1:0] pa_in_tag, pa_out_tag;

  ec_padd #(.EXT(EXT), .II(II), .LATENCY(PADD_LAT), .TAGW(BW)) u_padd (
    .clk, .rst, .in_valid(pa_in_valid), .in_ready(pa_in_ready), .p1(pa_p1), .p2(pa_p2),
    .in_tag(pa_in_tag), .out_valid(pa_out_valid), .sum(pa_sum), .out_tag(pa_out_tag));

  // ---- stage 1/2: scalar fetch and push -------------------------------------
  logic [NW:0]   rd_ptr;
  logic          req_v;
  logic [NW:0]   req_addr;
  logic [W-1:0]  dg0, dg1;
  logic          nd0, nd1, push_ok, fail;

  always_comb begin
    logic [FW-1:0] s0, s1;
    s0  = sc_rd_data[0] >> off;
    s1  = sc_rd_data[1] >> off;
    dg0 = s0[W-1:0];
    dg1 = s1[W-1:0];
    nd0 = req_v && (req_addr < (NW+1)'(n))     && dg0 != 0;
    nd1 = req_v && (req_addr + 1 < (NW+1)'(n)) && dg1 != 0;
    push_ok = 1'b1;
    if (nd0 && nd1 && dg0 == dg1) push_ok = int'(qcnt[dg0-1]) + 2 <= D;
    else begin
      if (nd0 && int'(qcnt[dg0-1]) + 1 > D) push_ok = 1'b0;
      if (nd1 && int'(qcnt[dg1-1]) + 1 > D) push_ok = 1'b0;
    end
    fail = req_v && !push_ok;
    sc_rd_en      = state == S_ACC && !fail && rd_ptr < (NW+1)'(n);
    sc_rd_addr[0] = AW'(rd_ptr);
    sc_rd_addr[1] = AW'(rd_ptr + 1);
  end
  assign ev_stall = fail;

  // ---- stage 3: pop -----------------------------------------------------------
  logic [BW-1:0] ptr;
  logic          sel_v;
  logic [BW-1:0] sel_b;
  logic [NB-1:0] elig;
  logic [7:0]    iss_cd;
  logic          issue;

  always_comb begin
    for (int b = 0; b < NB; b++) elig[b] = qcnt[b] != 0 && !busy[b];
  end

  bucket_sched #(.NB(NB), .CW(CW), .MAXR(MAXR)) u_sched (
    .policy(POLICY), .cnt(qcnt), .elig, .ptr, .sel_valid(sel_v), .sel_idx(sel_b));

  assign issue     = state == S_ACC && iss_cd == 0 && sel_v;
  assign ev_issue  = issue;
  assign ev_bubble = state == S_ACC && iss_cd == 0 && !sel_v && (qcnt != '0 || req_v || rd_ptr < (NW+1)'(n));

  // ---- stage 4: point fetch ---------------------------------------------------
  logic          f_v;
  logic [BW-1:0] f_b;
  pt_t           f_acc;
  assign pt_rd_en   = issue;
  assign pt_rd_addr = qmem[int'(sel_b) * D + int'(qhead[sel_b])];

  // ---- adder input mux ----------------------------------------------------------
  always_comb begin
    pa_in_valid = 1'b0;
    pa_p1       = f_acc;
    pa_p2       = pt_rd_data;
    pa_in_tag   = f_b;
    case (state)
      S_ACC:   pa_in_valid = f_v;
      S_RED_A: begin pa_in_valid = 1'b1; pa_p1 = sr; pa_p2 = opb; end
      S_RED_B: begin pa_in_valid = 1'b1; pa_p1 = st; pa_p2 = sr;  end
      S_WR_D:  begin pa_in_valid = 1'b1; pa_p1 = sr; pa_p2 = sr;  end
      S_WR_A:  begin pa_in_valid = 1'b1; pa_p1 = sr; pa_p2 = opb; end
      default: ;
    endcase
  end

  assign cmd_ready = state == S_IDLE;

  // ---- sequential -----------------------------------------------------------------
  always_ff @(posedge clk) begin
    res_valid <= 1'b0;
    if (rst) begin
      state    <= S_IDLE;
      qhead    <= '0;
      qtail    <= '0;
      qcnt     <= '0;
      busy     <= '0;
      acc_v    <= '0;
      req_v    <= 1'b0;
      f_v      <= 1'b0;
      iss_cd   <= '0;
      ptr      <= '0;
      rd_ptr   <= '0;
      n        <= '0;
      inflight <= 0;
    end else begin
      // ---------------- queue bookkeeping (push, pop) ----------------
      begin
        logic [NB-1:0][CW-1:0] c;
        c = qcnt;
        if (state == S_ACC && req_v && push_ok) begin
          if (nd0) begin
            qmem[int'(dg0-1) * D + int'(qtail[dg0-1])] <= AW'(req_addr);
            c[dg0-1] = c[dg0-1] + 1'b1;
          end
          if (nd1) begin
            if (nd0 && dg0 == dg1) begin
              qmem[int'(dg1-1) * D + int'(QPW'(qtail[dg1-1] + 1'b1))] <= AW'(req_addr + 1);
              qtail[dg1-1] <= qtail[dg1-1] + 2'd2;
            end else begin
              qmem[int'(dg1-1) * D + int'(qtail[dg1-1])] <= AW'(req_addr + 1);
              qtail[dg1-1] <= qtail[dg1-1] + 1'b1;
            end
            c[dg1-1] = c[dg1-1] + 1'b1;
          end
          if (nd0 && !(nd1 && dg0 == dg1)) qtail[dg0-1] <= qtail[dg0-1] + 1'b1;
        end
        if (issue) begin
          c[sel_b] = c[sel_b] - 1'b1;
          qhead[sel_b] <= qhead[sel_b] + 1'b1;
        end
        qcnt <= c;
      end

      // ---------------- fetch pointer ----------------
      if (state == S_ACC) begin
        if (fail) begin
          rd_ptr <= req_addr;
          req_v  <= 1'b0;
        end else begin
          req_v    <= sc_rd_en;
          req_addr <= rd_ptr;
          if (sc_rd_en) rd_ptr <= rd_ptr + 2;
        end
      end else begin
        req_v <= 1'b0;
      end

      // ---------------- issue / point fetch / write-back ----------------
      ptr <= (POLICY == POL_MAXR) ? BW'((int'(ptr) + MAXR) % NB)
                                  : BW'((int'(ptr) + 1) % NB);
      if (issue)              iss_cd <= 8'(II - 1);
      else if (iss_cd != 0)   iss_cd <= iss_cd - 1'b1;
      f_v <= issue;
      if (issue) begin
        f_b   <= sel_b;
        f_acc <= acc_v[int'(slot) * NB + int'(sel_b)] ? acc[int'(slot) * NB + int'(sel_b)] : inf_pt();
      end
      begin
        logic [NB-1:0] bz;
        bz = busy;
        if (issue) bz[sel_b] = 1'b1;
        if (state == S_ACC && pa_out_valid) begin
          bz[pa_out_tag] = 1'b0;
          acc[int'(slot) * NB + int'(pa_out_tag)]   <= pa_sum;
          acc_v[int'(slot) * NB + int'(pa_out_tag)] <= 1'b1;
        end
        busy <= bz;
      end
      inflight <= inflight + (issue ? 1 : 0) - ((state == S_ACC && pa_out_valid) ? 1 : 0);

      // ---------------- control ----------------
      case (state)
        S_IDLE: if (cmd_valid) begin
          slot <= cmd_slot;
          case (cmd_op)
            PE_CLEAR: for (int b = 0; b < NB; b++) acc_v[int'(cmd_slot) * NB + b] <= 1'b0;
            PE_ACCUM: begin
              off    <= cmd_off;
              n      <= cmd_n;
              rd_ptr <= '0;
              state  <= S_ACC;
            end
            PE_REDUCE: begin
              sr    <= inf_pt();
              st    <= inf_pt();
              ridx  <= (BW+1)'(NB);
              state <= S_RED_A;
            end
            default: begin   // PE_WINRED
              sr    <= cmd_pa;
              kleft <= cmd_k;
              state <= (cmd_k == 0) ? S_WR_A : S_WR_D;
            end
          endcase
        end
        S_ACC: if (rd_ptr >= (NW+1)'(n) && !req_v && !sc_rd_en && qcnt == '0 && inflight == 0 && !f_v)
          state <= S_IDLE;
        // Algorithm 1: s_r <- s_r + B_i ; s_t <- s_t + s_r, i = NB .. 1
        S_RED_A:  if (pa_in_ready) state <= S_RED_AW;
        S_RED_AW: if (pa_out_valid) begin sr <= pa_sum; state <= S_RED_B; end
        S_RED_B:  if (pa_in_ready) state <= S_RED_BW;
        S_RED_BW: if (pa_out_valid) begin
          st <= pa_sum;
          if (ridx == 1) begin
            res_valid <= 1'b1;
            res_point <= pa_sum;
            state     <= S_IDLE;
          end else begin
            ridx  <= ridx - 1'b1;
            state <= S_RED_A;
          end
        end
        S_WR_D:   if (pa_in_ready) state <= S_WR_DW;
        S_WR_DW:  if (pa_out_valid) begin
          sr    <= pa_sum;
          kleft <= kleft - 1'b1;
          state <= (kleft == 1) ? S_WR_A : S_WR_D;
        end
        S_WR_A:   if (pa_in_ready) state <= S_WR_AW;
        S_WR_AW:  if (pa_out_valid) begin
          res_valid <= 1'b1;
          res_point <= pa_sum;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // second operand: the next bucket register in a reduction (infinity when
  // empty), or the addend of a window-reduction step
  always_ff @(posedge clk) begin
    if (state == S_IDLE && cmd_valid && cmd_op == PE_WINRED) begin
      opb <= cmd_pb;
    end else if (state == S_RED_BW && pa_out_valid && ridx != 1) begin
      opb <= acc_v[int'(slot) * NB + int'(ridx) - 2] ? acc[int'(slot) * NB + int'(ridx) - 2] : inf_pt();
    end else if (state == S_IDLE && cmd_valid && cmd_op == PE_REDUCE) begin
      opb <= acc_v[int'(cmd_slot) * NB + NB - 1] ? acc[int'(cmd_slot) * NB + NB - 1] : inf_pt();
    end
  end

  // the adder takes a new pair at most every II cycles
  always_ff @(posedge clk) begin
    if (!rst && state == S_ACC && f_v) assert (pa_in_ready) else $error("msm_pe: adder not ready");
  end
endmodule

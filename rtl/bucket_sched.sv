// bucket_sched: picks the bucket queue from which an MSM PE issues its next
// point addition.
//
// A bucket is eligible when its address queue is non-empty and no addition
// into its accumulation register is still in the adder pipeline. Three
// policies from the paper:
//   POL_RR   : look only at bucket `ptr`; the caller advances ptr by one
//              every cycle (round robin, a bubble when it is not eligible).
//   POL_MAXR : among the R buckets ptr .. ptr+R-1 (modulo NB) take the
//              eligible one with the longest queue; the caller advances ptr
//              by R every cycle (Max-r).
//   POL_LQ   : the eligible bucket with the longest queue over all NB
//              buckets (longest queue), found by a binary tournament tree.
// Ties go to the lower bucket index (this design's choice). Purely
// combinational: sel_valid/sel_idx follow the inputs in the same cycle.
module bucket_sched
  import szkp_pkg::*;
#(
  parameter int NB   = 255,
  parameter int CW   = 6,
  parameter int MAXR = 8
) (
  input  policy_e                   policy,
  input  logic [NB-1:0][CW-1:0]     cnt,
  input  logic [NB-1:0]             elig,
  input  logic [$clog2(NB)-1:0]     ptr,
  output logic                      sel_valid,
  output logic [$clog2(NB)-1:0]     sel_idx
);
  localparam int IW = $clog2(NB);
  localparam int NL = 1 << $clog2(NB);   // leaves of the tournament tree

  logic [NB-1:0] mask;   // buckets the policy may look at

  always_comb begin
    mask = '0;
    case (policy)
      POL_RR:   mask[ptr] = 1'b1;
      POL_MAXR: for (int i = 0; i < MAXR; i++) mask[(int'(ptr) + i) % NB] = 1'b1;
      default:  mask = '1;
    endcase
  end

  // Tournament: node n holds {valid, count, index}; children 2n and 2n+1.
  logic           tv [2*NL];
  logic [CW-1:0]  tc [2*NL];
  logic [IW-1:0]  ti [2*NL];

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      tv[NL+l] = (l < NB) ? (elig[l] && mask[l]) : 1'b0;
      tc[NL+l] = (l < NB) ? cnt[l] : '0;
      ti[NL+l] = IW'(l);
    end
    for (int n = NL - 1; n >= 1; n--) begin
      if (tv[2*n] && (!tv[2*n+1] || tc[2*n] >= tc[2*n+1])) begin
        tv[n] = 1'b1; tc[n] = tc[2*n]; ti[n] = ti[2*n];
      end else begin
        tv[n] = tv[2*n+1]; tc[n] = tc[2*n+1]; ti[n] = ti[2*n+1];
      end
    end
    tv[0] = 1'b0; tc[0] = '0; ti[0] = '0;
    sel_valid = tv[1];
    sel_idx   = ti[1];
  end
endmodule

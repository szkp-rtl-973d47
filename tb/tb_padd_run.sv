// tb_padd_run: drives one ec_padd configuration with a fixed list of point
// pairs (general sums, doublings, infinity cases, P + (-P)) issued as fast as
// in_ready allows, and checks every sum against the affine reference and
// its latency against LATENCY cycles. Reports its counts through ports.
module tb_padd_run
  import szkp_pkg::*;
  import tb_ec_ref::*;
#(
  parameter int EXT = 1,
  parameter int II  = 1,
  parameter int LAT = 30
) (
  input  logic clk,
  input  logic rst,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int NT = 8;
  apt_t pa [NT], pb [NT], ref_s [NT];
  logic [2:0][EXT-1:0][FW-1:0] in1 [NT], in2 [NT];
  longint issue_cyc [NT];
  longint cyc;
  int     nissue, nrecv;

  logic                        in_valid, in_ready, out_valid;
  logic [2:0][EXT-1:0][FW-1:0] p1, p2, sum;
  logic [7:0]                  in_tag, out_tag;

  ec_padd #(.EXT(EXT), .II(II), .LATENCY(LAT), .TAGW(8)) dut (
    .clk, .rst, .in_valid, .in_ready, .p1, .p2, .in_tag, .out_valid, .sum, .out_tag);

  initial begin
    apt_t g;
    logic [1535:0] t;
    g = (EXT == 1) ? g1_gen() : g2_gen();
    for (int i = 0; i < NT; i++) begin
      case (i)
        0, 1, 2: begin pa[i] = amul(g, u256'($urandom_range(2, 60000))); pb[i] = amul(g, u256'($urandom_range(2, 60000))); end
        3:       begin pa[i] = amul(g, 7); pb[i] = pa[i]; end            // doubling
        4:       begin pa[i] = amul(g, 5); pb[i] = ainf(); end           // P + O
        5:       begin pa[i] = ainf(); pb[i] = ainf(); end               // O + O
        6:       begin pa[i] = amul(g, 11); pb[i] = aneg(pa[i]); end     // P + (-P)
        default: begin pa[i] = ainf(); pb[i] = amul(g, 3); end           // O + P
      endcase
      ref_s[i] = aadd(pa[i], pb[i]);
      t = to_proj(pa[i], u256'($urandom_range(1, 1 << 30)), EXT); in1[i] = t[3*EXT*FW-1:0];
      t = to_proj(pb[i], u256'($urandom_range(1, 1 << 30)), EXT); in2[i] = t[3*EXT*FW-1:0];
    end
  end

  always_comb begin
    in_valid = !rst && nissue < NT;
    p1     = in1[nissue % NT];
    p2     = in2[nissue % NT];
    in_tag = 8'(nissue);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cyc <= 0; nissue <= 0; nrecv <= 0; checks <= 0; failures <= 0; done <= 0;
    end else begin
      cyc <= cyc + 1;
      if (in_valid && in_ready) begin
        issue_cyc[nissue] <= cyc;
        nissue <= nissue + 1;
      end
      if (out_valid) begin
        logic [1535:0] v;
        int k;
        v = '0;
        v[3*EXT*FW-1:0] = sum;
        k = int'(out_tag);
        nrecv <= nrecv + 1;
        checks <= checks + 3;
        if (k != nrecv) begin
          failures <= failures + 1;
          $display("EXT=%0d II=%0d: tag %0d, expected %0d", EXT, II, k, nrecv);
        end
        if (!proj_eq(v, ref_s[k % NT], EXT)) begin
          failures <= failures + 1;
          $display("EXT=%0d II=%0d: wrong sum for case %0d", EXT, II, k);
        end
        if (cyc - issue_cyc[k % NT] != longint'(LAT)) begin
          failures <= failures + 1;
          $display("EXT=%0d II=%0d: latency %0d, expected %0d", EXT, II, cyc - issue_cyc[k % NT], LAT);
        end
        if (k > 0 && issue_cyc[k % NT] - issue_cyc[(k - 1) % NT] != longint'(II)) begin
          failures <= failures + 1;
          $display("EXT=%0d II=%0d: issue spacing wrong", EXT, II);
        end
        if (nrecv == NT - 1) done <= 1;
      end
    end
  end
endmodule

// fe_mul_bank: NOPS independent field multiplications folded onto
// ceil(NOPS/II) multipliers.
//
// This is how a point adder trades throughput for multipliers (the paper's
// initiation interval, II). An operand set is captured when in_valid is high;
// in the II following cycles, phase k feeds operations k*NM .. k*NM+NM-1 to
// the NM = ceil(NOPS/II) multipliers. Results are collected into y[] and
// out_valid pulses for one cycle exactly BANK_LAT = 1 + II + fe_mul_lat(EXT)
// cycles after in_valid. y[] is only guaranteed during that cycle.
// in_valid may be asserted at most once every II cycles.
module fe_mul_bank
  import szkp_pkg::*;
#(
  parameter int EXT  = 1,
  parameter int NOPS = 6,
  parameter int II   = 1
) (
  input  logic                             clk,
  input  logic                             rst,
  input  logic                             in_valid,
  input  logic [NOPS-1:0][EXT-1:0][FW-1:0] a,
  input  logic [NOPS-1:0][EXT-1:0][FW-1:0] b,
  output logic                             out_valid,
  output logic [NOPS-1:0][EXT-1:0][FW-1:0] y
);
  localparam int NM  = (NOPS + II - 1) / II;
  localparam int LAT = fe_mul_lat(EXT);
  localparam int PHW = (II > 1) ? $clog2(II) : 1;

  logic [NOPS-1:0][EXT-1:0][FW-1:0] ha, hb;
  logic                             active;
  logic [PHW-1:0]                   ph;
  logic [NM-1:0][EXT-1:0][FW-1:0]   ma, mb, my;
  logic [PHW:0]                     tag_q;   // {valid, phase} at the multiplier outputs

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      ph     <= '0;
    end else if (in_valid) begin
      active <= 1'b1;
      ph     <= '0;
    end else if (active) begin
      if (int'(ph) == II - 1) active <= 1'b0;
      else                    ph     <= ph + 1'b1;
    end
    if (in_valid) begin
      ha <= a;
      hb <= b;
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      ma[m] = '0;
      mb[m] = '0;
      for (int k = 0; k < II; k++) begin
        if (int'(ph) == k && k * NM + m < NOPS) begin
          ma[m] = ha[k*NM+m];
          mb[m] = hb[k*NM+m];
        end
      end
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_mul
    fe_mul #(.EXT(EXT)) u_mul (.clk, .a(ma[m]), .b(mb[m]), .y(my[m]));
  end

  // The tag travels with the operands through the LAT multiplier stages.
  logic [PHW:0] tag_d [LAT];
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LAT; i++) tag_d[i] <= '0;
    end else begin
      tag_d[0] <= {active, ph};
      for (int i = 1; i < LAT; i++) tag_d[i] <= tag_d[i-1];
    end
  end
  assign tag_q = tag_d[LAT-1];

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= tag_q[PHW] && int'(tag_q[PHW-1:0]) == II - 1;
    if (tag_q[PHW]) begin
      for (int k = 0; k < II; k++) begin
        if (int'(tag_q[PHW-1:0]) == k) begin
          for (int m = 0; m < NM; m++) begin
            if (k * NM + m < NOPS) y[k*NM+m] <= my[m];
          end
        end
      end
    end
  end
endmodule

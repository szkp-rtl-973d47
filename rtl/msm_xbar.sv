// msm_xbar: the MUX network between the MSM PEs and the banked scalar and
// point buffers.
//
// The buffers are split into KM banks; in round j, PE i works on bank
// (i + j) mod KM, so no two PEs ever address the same bank and every bank
// needs only its two ports. The crossbar is a rotation by `rot`: requests
// from PE i go to bank (i + rot) mod KM, and read data from that bank goes
// back to PE i. Reads have a one-cycle latency in the banks; rot must stay
// constant while reads are in flight (it only changes between rounds, when
// all PEs are idle). Purely combinational.
module msm_xbar #(
  parameter int KM = 16,
  parameter int AW = 10,   // bank address width
  parameter int SW = 256,  // scalar width
  parameter int PW = 768   // point width
) (
  input  logic [$clog2(KM+1)-1:0]    rot,
  // PE side
  input  logic [KM-1:0]              pe_sc_en,
  input  logic [KM-1:0][1:0][AW-1:0] pe_sc_addr,
  output logic [KM-1:0][1:0][SW-1:0] pe_sc_data,
  input  logic [KM-1:0]              pe_pt_en,
  input  logic [KM-1:0][AW-1:0]      pe_pt_addr,
  output logic [KM-1:0][PW-1:0]      pe_pt_data,
  // bank side
  output logic [KM-1:0]              bk_sc_en,
  output logic [KM-1:0][1:0][AW-1:0] bk_sc_addr,
  input  logic [KM-1:0][1:0][SW-1:0] bk_sc_data,
  output logic [KM-1:0]              bk_pt_en,
  output logic [KM-1:0][AW-1:0]      bk_pt_addr,
  input  logic [KM-1:0][PW-1:0]      bk_pt_data
);
  always_comb begin
    for (int i = 0; i < KM; i++) begin
      int b;
      b = (i + int'(rot)) % KM;
      bk_sc_en[b]   = pe_sc_en[i];
      bk_sc_addr[b] = pe_sc_addr[i];
      bk_pt_en[b]   = pe_pt_en[i];
      bk_pt_addr[b] = pe_pt_addr[i];
      pe_sc_data[i] = bk_sc_data[b];
      pe_pt_data[i] = bk_pt_data[b];
    end
  end
endmodule

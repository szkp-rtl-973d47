// ntt_pe: one NTT processing element: an n-point (I)NTT over Fr, n a power
// of two with 2U <= n <= NMAX, computed with U butterflies in constant
// geometry.
//
// Constant geometry (Pease / Korn-Lambiotte): every stage uses the same data
// movement, so each butterfly has fixed read and write addresses and the
// address generators are static. Data live in two memories (ping, pong),
// each of U banks, element e in bank e mod U, row e / U. Stage s reads one
// memory and writes the other:
//   DIF (forward, cfg_dit = 0): a = x[k], b = x[k + n/2]
//        y[2k] = a + b, y[2k+1] = (a - b) w^((k >> s) << s)
//   DIT (inverse, cfg_dit = 1): a = x[2k], b = x[2k+1]
//        y[k] = a + w^e b, y[k + n/2] = a - w^e b, e = (k >> (L-1-s)) << (L-1-s)
// with k = c*U + j for butterfly j in cycle c, L = log2 n. Every bank then
// sees exactly two reads and two writes per cycle (true dual port). DIF
// takes natural order to bit-reversed order, DIT the reverse, so a forward
// transform followed by an inverse one needs no bit reversal (the chaining
// the paper uses). After L stages the result sits in ping or pong according
// to L mod 2, which selects the memory read by the element-wise unit.
//
// Operation: pulse start with cfg_*; send n/U input rows (in_valid,
// in_data[l] = element r*U + l of row r) into ping; the L stages run
// (a stage's writes drain before the next stage starts); then n/U output
// rows leave through the element-wise unit (ntt_ew) on out_valid/out_data,
// one row per cycle, without backpressure. If cfg_op_store is set, the
// output also replaces the operand memory row (so an intermediate such as
// A(x) or A(x)B(x) can serve as the operand of a later pass without going
// off chip). The twiddle table (tw_wr_*, tw[e] = w^e for e < n/2, inverse
// root for an inverse transform) and the operand memory (op_wr_*) are
// loaded from outside. Values are in Montgomery form.
// Not in this PE: overlapping the load of one transform with the compute of
// the previous one (the paper's double buffering across transforms).
module ntt_pe
  import szkp_pkg::*;
#(
  parameter int U    = 32,
  parameter int NMAX = 1024
) (
  input  logic                          clk,
  input  logic                          rst,
  // configuration, sampled on start
  input  logic                          start,
  input  logic [4:0]                    cfg_logn,
  input  logic                          cfg_dit,
  input  ew_op_e                        cfg_ew_op,
  input  logic                          cfg_op_store,
  input  fe_t                           cfg_gen_step,
  output logic                          busy,
  // tables
  input  logic                          tw_wr_en,
  input  logic [$clog2(NMAX)-2:0]       tw_wr_addr,
  input  fe_t                           tw_wr_data,
  input  logic                          op_wr_en,
  input  logic [$clog2(NMAX/U)-1:0]     op_wr_row,
  input  logic [U-1:0][FW-1:0]          op_wr_data,
  input  logic                          gen_wr_en,
  input  logic [$clog2(U)+1:0]          gen_wr_idx,
  input  fe_t                           gen_wr_data,
  // data in / out
  input  logic                          in_valid,
  input  logic [U-1:0][FW-1:0]          in_data,
  output logic                          out_valid,
  output logic [U-1:0][FW-1:0]          out_data,
  output logic                          ev_stage      // a butterfly stage finished
);
  localparam int ROWS = NMAX / U;
  localparam int RW   = $clog2(ROWS);
  localparam int TW   = $clog2(NMAX) - 1;
  localparam int BLAT = MONT_LAT + 1;    // butterfly latency
  localparam int LW   = (U > 1) ? $clog2(U) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_STAGE, S_DRAIN, S_OUT, S_OUTW} state_e;
  state_e state;

  fe_t ping [U][ROWS];
  fe_t pong [U][ROWS];
  fe_t tw   [NMAX/2];
  logic [U-1:0][FW-1:0] opm [ROWS];

  logic [4:0]    logn;
  logic          dit, op_store;
  ew_op_e        ew_op;
  fe_t           gen_step;
  logic [RW:0]   c;            // row / butterfly-group counter
  logic [4:0]    s;            // stage
  logic [RW:0]   nrows;        // n / U
  logic [RW:0]   half;         // n / (2U)
  logic [3:0]    drain;

  assign nrows = (RW+1)'((1 << logn) / U);
  assign half  = nrows >> 1;
  assign busy  = state != S_IDLE;

  // ---- butterfly address generation -------------------------------------------
  // per butterfly j: read rows/banks, twiddle index, write rows/banks
  logic [U-1:0][RW-1:0] ra_row, rb_row;
  logic [U-1:0][LW-1:0] ra_bank, rb_bank;
  logic [U-1:0][TW-1:0] tw_idx;
  logic                 src_pong;       // stage reads pong

  always_comb begin
    src_pong = s[0];
    for (int j = 0; j < U; j++) begin
      int k, e0, e1, sh;
      k  = int'(c) * U + j;
      if (!dit) begin
        e0 = k;                      e1 = k + int'(half) * U;
        sh = int'(s);
      end else begin
        e0 = 2 * k;                  e1 = 2 * k + 1;
        sh = int'(logn) - 1 - int'(s);
      end
      ra_bank[j] = LW'(e0 % U); ra_row[j] = RW'(e0 / U);
      rb_bank[j] = LW'(e1 % U); rb_row[j] = RW'(e1 / U);
      tw_idx[j]  = TW'((k >> sh) << sh);
    end
  end

  // stage pipeline: read (1 cycle) -> butterfly (BLAT) -> write
  logic                 rd_v;
  logic [RW:0]          rd_c;
  logic                 rd_pong;
  fe_t                  ba [U], bb [U], bw [U];
  fe_t                  y0 [U], y1 [U];
  logic                 wr_v;
  logic [RW:0]          wr_c;
  logic                 wr_pong;   // destination is pong

  always_ff @(posedge clk) begin
    rd_v    <= state == S_STAGE;
    rd_c    <= c;
    rd_pong <= src_pong;
    for (int j = 0; j < U; j++) begin
      ba[j] <= src_pong ? pong[ra_bank[j]][ra_row[j]] : ping[ra_bank[j]][ra_row[j]];
      bb[j] <= src_pong ? pong[rb_bank[j]][rb_row[j]] : ping[rb_bank[j]][rb_row[j]];
      bw[j] <= tw[tw_idx[j]];
    end
  end

  for (genvar j = 0; j < U; j++) begin : g_bf
    ntt_bfly u_bf (.clk, .dit, .a(ba[j]), .b(bb[j]), .w(bw[j]), .y0(y0[j]), .y1(y1[j]));
  end

  pipe_delay #(.W(RW+3), .N(BLAT)) u_wd (.clk, .d({rd_v, rd_c, !rd_pong}), .q({wr_v, wr_c, wr_pong}));

  // write addresses of butterfly j's outputs for group wr_c
  logic [U-1:0][RW-1:0] w0_row, w1_row;
  logic [U-1:0][LW-1:0] w0_bank, w1_bank;
  always_comb begin
    for (int j = 0; j < U; j++) begin
      int k, e0, e1;
      k = int'(wr_c) * U + j;
      if (!dit) begin e0 = 2 * k; e1 = 2 * k + 1; end
      else      begin e0 = k;     e1 = k + int'(half) * U; end
      w0_bank[j] = LW'(e0 % U); w0_row[j] = RW'(e0 / U);
      w1_bank[j] = LW'(e1 % U); w1_row[j] = RW'(e1 / U);
    end
  end

  // ---- element-wise unit ------------------------------------------------------------
  logic                 ew_in_v, ew_out_v;
  logic [U-1:0][FW-1:0] ew_x, ew_op_d, ew_y;
  logic [RW:0]          out_row;
  logic                 res_pong;
  assign res_pong = logn[0];      // mod(log2 n, 2): where the last stage wrote

  always_ff @(posedge clk) begin
    ew_in_v <= state == S_OUT;
    for (int l = 0; l < U; l++) ew_x[l] <= res_pong ? pong[l][RW'(c)] : ping[l][RW'(c)];
    ew_op_d <= opm[RW'(c)];
  end

  ntt_ew #(.U(U)) u_ew (
    .clk, .rst, .op_mode(ew_op), .gen_step, .gen_wr_en, .gen_wr_idx, .gen_wr_data,
    .in_valid(ew_in_v), .x(ew_x), .opnd(ew_op_d), .out_valid(ew_out_v), .y(ew_y));

  assign out_valid = ew_out_v;
  assign out_data  = ew_y;

  // ---- memories and control ---------------------------------------------------------
  always_ff @(posedge clk) begin
    if (tw_wr_en) tw[tw_wr_addr] <= tw_wr_data;
    if (op_wr_en) opm[op_wr_row] <= op_wr_data;
    else if (ew_out_v && op_store) opm[RW'(out_row)] <= ew_y;
    if (state == S_LOAD && in_valid) begin
      for (int l = 0; l < U; l++) ping[l][RW'(c)] <= in_data[l];
    end
    if (wr_v) begin
      for (int j = 0; j < U; j++) begin
        if (wr_pong) begin
          pong[w0_bank[j]][w0_row[j]] <= y0[j];
          pong[w1_bank[j]][w1_row[j]] <= y1[j];
        end else begin
          ping[w0_bank[j]][w0_row[j]] <= y0[j];
          ping[w1_bank[j]][w1_row[j]] <= y1[j];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    ev_stage <= 1'b0;
    if (rst) begin
      state   <= S_IDLE;
      c       <= '0;
      s       <= '0;
      out_row <= '0;
    end else begin
      if (ew_out_v) out_row <= out_row + 1'b1;
      case (state)
        S_IDLE: if (start) begin
          logn     <= cfg_logn;
          dit      <= cfg_dit;
          ew_op    <= cfg_ew_op;
          op_store <= cfg_op_store;
          gen_step <= cfg_gen_step;
          c        <= '0;
          s        <= '0;
          state    <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          if (c == nrows - 1) begin c <= '0; state <= S_STAGE; end
          else c <= c + 1'b1;
        end
        S_STAGE: begin
          if (c == half - 1) begin c <= '0; drain <= 4'(BLAT + 1); state <= S_DRAIN; end
          else c <= c + 1'b1;
        end
        S_DRAIN: begin
          if (drain == 0) begin
            ev_stage <= 1'b1;
            if (s == logn - 1) begin out_row <= '0; state <= S_OUT; end
            else begin s <= s + 1'b1; state <= S_STAGE; end
          end else drain <= drain - 1'b1;
        end
        S_OUT: begin
          if (c == nrows - 1) begin c <= '0; drain <= 4'(2 * MONT_LAT + 2); state <= S_OUTW; end
          else c <= c + 1'b1;
        end
        S_OUTW: begin
          if (drain == 0) state <= S_IDLE;
          else drain <= drain - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

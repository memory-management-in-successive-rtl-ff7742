// mk_sc_decoder: successive-cancellation decoder for a multi-kernel polar code
// with transformation matrix G_N = T_{p_1} x T_{p_2} x ... x T_{p_s}
// (Kronecker product, each p_j = 2 or 3), built on the reduced memory
// structure: s+1 LLR vectors and s partial-sum matrices whose size shrinks
// with the stage index instead of an N x (s+1) LLR array.
//
//   Lambda_0   N channel LLRs (mk_chan_mem, digit-reversed on write)
//   Lambda_j   p_{j+1}*...*p_s LLRs, j = 1..s (mk_llr_stage); Lambda_s is the
//              LLR of the current bit
//   Pi_j       p_{j+1}*...*p_s rows of partial sums (mk_ps_stage); p_j
//              columns, p_j-1 for Pi_1 and Pi_s
//   Upsilon    N decoded bits (mk_ubits)
// mk_sc_ctrl sequences the per-bit LLR update, decision (mk_hard_dec) and
// partial-sum update. Each LLR vector is updated by all its kernels in one
// cycle; each partial-sum matrix column is written in one cycle.
//
// Use: while idle, write the N channel LLRs (llr_we, llr_idx = code bit
// index in natural order, llr_in signed, positive = bit 0), hold the frozen
// mask (bit i = 1 freezes u_i to 0) stable, and pulse start. Each decided bit
// appears on bit_valid/bit_idx/bit_val in its decision cycle; done pulses
// once after the last bit and u_hat (bit i = u_i) then holds the whole
// decoded vector until the next start. The default is the (N=12) code of
// G_12 = T_2 x T_2 x T_3 with Q = 6 bit LLRs.
// The memory layout and schedule follow the published scheme; the LLR
// arithmetic, input order, interface and timing are this design's own.
module mk_sc_decoder
  import mk_pkg::*;
#(
  parameter int unsigned S = 3,
  parameter int unsigned P [1:S] = '{2, 2, 3},
  parameter int unsigned Q = 6,
  localparam int unsigned N  = prod_all(),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // channel LLR load
  input  logic                llr_we,
  input  logic [IW-1:0]       llr_idx,
  input  logic signed [Q-1:0] llr_in,
  // code
  input  logic [N-1:0]        frozen,
  // control
  input  logic                start,
  output logic                busy,
  output logic                done,
  // results
  output logic                bit_valid,
  output logic [IW-1:0]       bit_idx,
  output logic                bit_val,
  output logic [N-1:0]        u_hat
);

  function automatic int unsigned prod_all();
    int unsigned r = 1;
    for (int unsigned t = 1; t <= S; t++) r *= P[t];
    return r;
  endfunction

  // entries of Lambda_j (and rows of Pi_j): p_{j+1}*...*p_s; M(0) = N
  function automatic int unsigned msize(input int unsigned j);
    int unsigned r = 1;
    for (int unsigned t = j + 1; t <= S; t++) r *= P[t];
    return r;
  endfunction

  // offset of Lambda_j in the concatenated LLR bus (in entries)
  function automatic int unsigned loff(input int unsigned j);
    int unsigned r = 0;
    for (int unsigned t = 0; t < j; t++) r += msize(t);
    return r;
  endfunction

  // offset of the rows of Pi_j in the concatenated partial-sum bus (in bits)
  function automatic int unsigned roff(input int unsigned j);
    int unsigned r = 0;
    for (int unsigned t = 1; t < j; t++) r += msize(t) * (P[t] - 1);
    return r;
  endfunction

  localparam int unsigned LTOT = loff(S + 1);   // all LLR entries
  localparam int unsigned RTOT = roff(S + 1);   // all partial-sum row bits

  logic [LTOT*Q-1:0]    lam_bus;   // Lambda_0 .. Lambda_s
  logic [LTOT-1:0]      nc_bus;    // column for Pi_{j-1} produced by Pi_j, at loff(j-1)
  logic [RTOT-1:0]      rows_bus;  // columns 0..p_j-2 of Pi_j, for the LLR kernels

  logic                 clr, dec_en;
  logic [S:1]           lam_upd, pi_we;
  logic [S:1][DIGIT_W-1:0] digits;
  logic [IW-1:0]        idx;
  logic                 u_bit;
  sc_state_e            ctrl_state;   // observable phase, for debug

  mk_sc_ctrl #(.S(S), .P(P)) u_ctrl (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (start),
    .busy    (busy),
    .done    (done),
    .clr     (clr),
    .lam_upd (lam_upd),
    .pi_we   (pi_we),
    .dec_en  (dec_en),
    .digits  (digits),
    .bit_idx (idx),
    .state   (ctrl_state)
  );

  mk_chan_mem #(.S(S), .P(P), .Q(Q)) u_lambda0 (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (llr_we),
    .idx   (llr_idx),
    .llr   (llr_in),
    .lam0  (lam_bus[0 +: N*Q])
  );

  for (genvar j = 1; j <= S; j++) begin : g_stage
    localparam int unsigned PJ = P[j];
    localparam int unsigned MJ = msize(j);
    localparam int unsigned WJ = (j == 1 || j == S) ? PJ - 1 : PJ;
    logic [MJ-1:0] col_data, last_col;

    if (j == S) begin : g_last
      assign col_data = MJ'(u_bit);
      assign last_col = MJ'(u_bit);
    end else begin : g_inner
      assign col_data = nc_bus[loff(j) +: MJ];
      assign last_col = '0;
    end

    mk_llr_stage #(.P(PJ), .M(MJ), .Q(Q)) u_lambda (
      .clk      (clk),
      .rst_n    (rst_n),
      .clr      (clr),
      .upd      (lam_upd[j]),
      .func     (digits[j]),
      .prev_llr (lam_bus[loff(j-1)*Q +: msize(j-1)*Q]),
      .ps_in    (rows_bus[roff(j) +: MJ*(PJ-1)]),
      .lam      (lam_bus[loff(j)*Q +: MJ*Q])
    );

    mk_ps_stage #(.P(PJ), .M(MJ), .W(WJ)) u_pi (
      .clk      (clk),
      .rst_n    (rst_n),
      .clr      (clr),
      .we       (pi_we[j]),
      .col      (digits[j]),
      .col_data (col_data),
      .last_col (last_col),
      .rows_lo  (rows_bus[roff(j) +: MJ*(PJ-1)]),
      .next_col (nc_bus[loff(j-1) +: msize(j-1)])
    );
  end

  mk_hard_dec #(.N(N), .Q(Q)) u_dec (
    .llr    ($signed(lam_bus[loff(S)*Q +: Q])),
    .idx    (idx),
    .frozen (frozen),
    .u_bit  (u_bit)
  );

  mk_ubits #(.N(N)) u_upsilon (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (clr),
    .we     (dec_en),
    .idx    (idx),
    .bit_in (u_bit),
    .u_hat  (u_hat)
  );

  assign bit_valid = dec_en;
  assign bit_idx   = idx;
  assign bit_val   = u_bit;

  // channel LLRs are loaded only between codewords
  assert property (@(posedge clk) disable iff (!rst_n) llr_we |-> !busy)
    else $error("mk_sc_decoder: channel LLR written while decoding");

endmodule

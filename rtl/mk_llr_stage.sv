// mk_llr_stage: LLR vector Lambda_j of decoding stage j and its kernel blocks.
//
// Lambda_j holds M = p_{j+1}*...*p_s LLRs of Q bits. When upd is high, all M
// entries are rewritten in one clock cycle by M parallel mk_kernel_llr
// blocks of size P = p_j:
//   Lambda_j(k) <= f_func^P(Lambda_{j-1}(k*P) .. Lambda_{j-1}(k*P+P-1),
//                           Pi_j(k,0) .. Pi_j(k,func-1))
// so kernel k reads P consecutive entries of the previous vector and row k
// of the partial-sum matrix Pi_j. Running all M kernels at once is the
// fully parallel choice among the "up to M kernel blocks" the scheme allows.
// clr zeroes the vector (start of a codeword); reset does the same.
// Packing: entry k of prev_llr / lam is bits [k*Q +: Q]; partial sum
// Pi_j(k,c) is ps_in[k*(P-1)+c], c < P-1.
// The grouping of the inputs follows the scheme's memory layout; full
// parallelism and flip-flop storage are this design's choices.
module mk_llr_stage #(
  parameter int unsigned P = 2,
  parameter int unsigned M = 6,
  parameter int unsigned Q = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 upd,
  input  logic [1:0]           func,
  input  logic [M*P*Q-1:0]     prev_llr,
  input  logic [M*(P-1)-1:0]   ps_in,
  output logic [M*Q-1:0]       lam
);

  logic signed [Q-1:0] lam_q [M];
  logic signed [Q-1:0] new_llr [M];

  for (genvar k = 0; k < M; k++) begin : g_kernel
    logic signed [Q-1:0] l_in [P];
    for (genvar c = 0; c < P; c++) begin : g_in
      assign l_in[c] = $signed(prev_llr[(k*P+c)*Q +: Q]);
    end
    mk_kernel_llr #(.P(P), .Q(Q)) u_kernel (
      .llr_in  (l_in),
      .ps_in   (ps_in[k*(P-1) +: (P-1)]),
      .func    (func),
      .llr_out (new_llr[k])
    );
    assign lam[k*Q +: Q] = lam_q[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < M; k++) lam_q[k] <= '0;
    end else if (clr) begin
      for (int k = 0; k < M; k++) lam_q[k] <= '0;
    end else if (upd) begin
      for (int k = 0; k < M; k++) lam_q[k] <= new_llr[k];
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) upd |-> (32'(func) < P))
    else $error("mk_llr_stage: function index %0d out of range for kernel %0d", func, P);

endmodule

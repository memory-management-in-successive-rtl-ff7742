// mk_chan_mem: channel LLR vector Lambda_0 with the input permutation P_1.
//
// Holds the N = p_1*...*p_s channel LLRs the decoder starts from. Channel
// LLRs arrive one per cycle in natural codeword order (llr_idx = n, the
// index of code bit x_n). Each is stored at the position the stage-1 kernels
// read it from: writing n in mixed radix <p_1..p_s> as digits c_1..c_s
// (n = sum c_j * p_{j+1}*...*p_s), the LLR goes to
//   q = c_1 + p_1*c_2 + p_1*p_2*c_3 + ... (the digit-reversed index),
// which makes every stage read its kernel inputs from consecutive entries.
// The value -2^(Q-1) is clamped to -(2^(Q-1)-1) so that all LLRs in the
// decoder are symmetric. Write is synchronous; lam0 is the stored vector,
// entry q at bits [q*Q +: Q]. Reset clears it.
// The scheme asks for a permutation of the channel LLRs before they enter
// Lambda_0 without spelling it out; the digit reversal is derived here and
// is what makes the later stages' implicit permutations vanish.
module mk_chan_mem #(
  parameter int unsigned S = 3,
  parameter int unsigned P [1:S] = '{2, 2, 3},
  parameter int unsigned Q = 6,
  localparam int unsigned N  = prod_all(),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we,
  input  logic [IW-1:0]       idx,
  input  logic signed [Q-1:0] llr,
  output logic [N*Q-1:0]      lam0
);

  function automatic int unsigned prod_all();
    int unsigned r = 1;
    for (int unsigned t = 1; t <= S; t++) r *= P[t];
    return r;
  endfunction

  // digit-reversed storage position of natural index n
  function automatic int unsigned perm(input int unsigned n);
    int unsigned rem, q, w;
    rem = n;
    q   = 0;
    w   = N;
    for (int unsigned t = S; t >= 1; t--) begin
      w   = w / P[t];                 // p_1*...*p_{t-1}
      q   = q + (rem % P[t]) * w;     // digit c_t gets weight p_1..p_{t-1}
      rem = rem / P[t];
    end
    return q;
  endfunction

  localparam logic signed [Q-1:0] LMIN = -$signed(Q'((1 << (Q-1)) - 1));

  logic signed [Q-1:0] mem [N];
  logic signed [Q-1:0] llr_c;
  logic [IW-1:0]       pos;

  assign llr_c = (llr < LMIN) ? LMIN : llr;
  assign pos   = IW'(perm(32'(idx)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < N; q++) mem[q] <= '0;
    end else if (we) begin
      mem[pos] <= llr_c;
    end
  end

  for (genvar q = 0; q < N; q++) begin : g_out
    assign lam0[q*Q +: Q] = mem[q];
  end

endmodule

// mk_kernel_llr: LLR update of one kernel block B_p (p = 2 or 3).
//
// Computes l_b = f_b^p(L_0..L_{p-1}, u_0..u_{b-1}), the LLR of input bit u_b
// of the kernel given the p LLRs of its outputs and the partial sums of the
// bits already decided. The exact marginal is replaced by the usual min-sum
// approximation, a [+] b ~ sign(a)sign(b)min(|a|,|b|); with a positive LLR
// meaning bit 0, the functions are:
//   T2: f0 = L0 [+] L1                 f1 = L1 + (-1)^u0 L0
//   T3: f0 = L0 [+] L1 [+] L2            f1 = (-1)^u0 L0 + (L1 [+] L2)
//       f2 = (-1)^u0 L1 + (-1)^(u0^u1) L2
// They follow from x = u*T_p for the kernels in mk_pkg. All results saturate
// to the symmetric range +-(2^(Q-1)-1). Combinational; func is b, ps_in bit r
// is u_r (bits at and above b are ignored).
// The form of the functions comes from the SC decoding scheme; the min-sum
// approximation, the value of Q and the saturation are this design's choices.
module mk_kernel_llr #(
  parameter int unsigned P = 3,
  parameter int unsigned Q = 6
) (
  input  logic signed [Q-1:0] llr_in [P],
  input  logic [P-2:0]        ps_in,
  input  logic [1:0]          func,
  output logic signed [Q-1:0] llr_out
);

  localparam logic signed [Q+1:0] LMAX = (Q+2)'((1 << (Q-1)) - 1);

  if (P != 2 && P != 3) begin : g_bad_p
    $error("mk_kernel_llr: only kernels of size 2 and 3 are supported");
  end

  function automatic logic signed [Q-1:0] sat(input logic signed [Q+1:0] v);
    logic signed [Q+1:0] r;
    r = (v > LMAX) ? LMAX : ((v < -LMAX) ? -LMAX : v);
    return r[Q-1:0];
  endfunction

  function automatic logic [Q-1:0] mag(input logic signed [Q-1:0] a);
    logic [Q-1:0] r;
    r = a[Q-1] ? Q'(-a) : Q'(a);
    return r;
  endfunction

  // min-sum check-node operation
  function automatic logic signed [Q-1:0] boxplus(input logic signed [Q-1:0] a,
                                                  input logic signed [Q-1:0] b);
    logic [Q-1:0] m;
    logic signed [Q+1:0] r;
    m = (mag(a) < mag(b)) ? mag(a) : mag(b);
    r = (a[Q-1] ^ b[Q-1]) ? -$signed({2'b00, m}) : $signed({2'b00, m});
    return sat(r);
  endfunction

  // (-1)^s * a, widened
  function automatic logic signed [Q+1:0] cneg(input logic signed [Q-1:0] a, input logic s);
    return s ? -(Q+2)'(a) : (Q+2)'(a);
  endfunction

  localparam int unsigned MAX_U = 2;
  logic [MAX_U-1:0] u;
  assign u = MAX_U'(ps_in);

  always_comb begin
    llr_out = '0;
    if (P == 2) begin
      if (func == 2'd0) llr_out = boxplus(llr_in[0], llr_in[1]);
      else              llr_out = sat(cneg(llr_in[1], 1'b0) + cneg(llr_in[0], u[0]));
    end else begin
      case (func)
        2'd0:    llr_out = boxplus(boxplus(llr_in[0], llr_in[1]), llr_in[P-1]);
        2'd1:    llr_out = sat(cneg(llr_in[0], u[0]) + cneg(boxplus(llr_in[1], llr_in[P-1]), 1'b0));
        default: llr_out = sat(cneg(llr_in[1], u[0]) + cneg(llr_in[P-1], u[0] ^ u[1]));
      endcase
    end
  end

endmodule

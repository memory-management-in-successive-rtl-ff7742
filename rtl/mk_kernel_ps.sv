// mk_kernel_ps: partial-sum (PS) update of one kernel block B_p.
//
// Computes x = u * T_p over GF(2): x_c is the XOR of the input partial sums
// u_r for which T_p[r][c] = 1. This is the left-to-right update of a kernel
// block and equally one kernel's worth of polar encoding. Purely
// combinational. P selects the kernel (2 or 3), the kernel matrices being
// those of mk_pkg. Bit r of u_in is u_r, bit c of x_out is x_c.
// Both kernel matrices are those of the code construction; the XOR network
// is the obvious realisation.
module mk_kernel_ps
  import mk_pkg::*;
#(
  parameter int unsigned P = 3
) (
  input  logic [P-1:0] u_in,
  output logic [P-1:0] x_out
);

  if (P != 2 && P != 3) begin : g_bad_p
    $error("mk_kernel_ps: only kernels of size 2 and 3 are supported");
  end

  always_comb begin
    logic [MAX_P-1:0] u_ext;
    u_ext = MAX_P'(u_in);
    for (int unsigned c = 0; c < P; c++) begin
      x_out[c] = ^(u_ext & kernel_col(P, c));
    end
  end

endmodule

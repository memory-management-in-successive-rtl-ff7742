// tb_mk_kernel_llr: checks the min-sum kernel LLR functions of mk_kernel_llr
// for both kernels (T2 and T3, Q = 6) against the reference of
// mk_tb_ref_pkg, on random LLRs including the saturation limits and on every
// function index and partial-sum combination.
module tb_mk_kernel_llr;
  import mk_tb_ref_pkg::*;

  localparam int Q = 6;
  int checks = 0, failures = 0;

  logic signed [Q-1:0] l2 [2], l3 [3];
  logic [0:0] u2;
  logic [1:0] u3, f2, f3;
  logic signed [Q-1:0] o2, o3;

  mk_kernel_llr #(.P(2), .Q(Q)) u_k2 (.llr_in(l2), .ps_in(u2), .func(f2), .llr_out(o2));
  mk_kernel_llr #(.P(3), .Q(Q)) u_k3 (.llr_in(l3), .ps_in(u3), .func(f3), .llr_out(o3));

  function automatic int rnd_llr();
    case ($urandom_range(0, 7))
      0:       return lmax(Q);
      1:       return -lmax(Q);
      2:       return 0;
      default: return int'($urandom_range(0, 2 * lmax(Q))) - lmax(Q);
    endcase
  endfunction

  initial begin
    int L [3];
    bit up [3];
    int e;
    for (int it = 0; it < 4000; it++) begin
      for (int c = 0; c < 3; c++) begin L[c] = rnd_llr(); up[c] = bit'($urandom_range(0, 1)); end
      up[2] = 0;
      l2[0] = Q'(L[0]); l2[1] = Q'(L[1]);
      l3[0] = Q'(L[0]); l3[1] = Q'(L[1]); l3[2] = Q'(L[2]);
      u2 = up[0];
      u3 = {up[1], up[0]};
      f2 = 2'(it % 2);
      f3 = 2'(it % 3);
      #1;
      checks++;
      e = kfun(2, it % 2, L, up, Q);
      if (int'(o2) != e) begin
        failures++;
        $display("T2 f%0d(%0d,%0d | u0=%0d) = %0d, expected %0d", it % 2, L[0], L[1], up[0], o2, e);
      end
      checks++;
      e = kfun(3, it % 3, L, up, Q);
      if (int'(o3) != e) begin
        failures++;
        $display("T3 f%0d(%0d,%0d,%0d | u=%0d%0d) = %0d, expected %0d", it % 3, L[0], L[1], L[2],
                 up[1], up[0], o3, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

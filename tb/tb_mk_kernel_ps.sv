// tb_mk_kernel_ps: exhaustive check of x = u*T_p for both kernels against
// the kernel matrices written out in mk_tb_ref_pkg.
module tb_mk_kernel_ps;
  import mk_tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [1:0] u2, x2;
  logic [2:0] u3, x3;

  mk_kernel_ps #(.P(2)) u_k2 (.u_in(u2), .x_out(x2));
  mk_kernel_ps #(.P(3)) u_k3 (.u_in(u3), .x_out(x3));

  initial begin
    bit e;
    for (int v = 0; v < 8; v++) begin
      u2 = 2'(v);
      u3 = 3'(v);
      #1;
      for (int c = 0; c < 3; c++) begin
        e = 0;
        for (int r = 0; r < 3; r++) e ^= u3[r] & tker(3, r, c);
        checks++;
        if (x3[c] !== e) begin failures++; $display("T3 u=%b x[%0d]=%b expected %b", u3, c, x3[c], e); end
        if (c < 2) begin
          e = 0;
          for (int r = 0; r < 2; r++) e ^= u2[r] & tker(2, r, c);
          checks++;
          if (x2[c] !== e) begin failures++; $display("T2 u=%b x[%0d]=%b expected %b", u2, c, x2[c], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

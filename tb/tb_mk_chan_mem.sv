// tb_mk_chan_mem: checks the channel LLR store Lambda_0 for the default code
// (kernels 2, 2, 3; N = 12; Q = 6). LLRs written at natural index
// n = 6*c1 + 3*c2 + c3 must appear at position q = c1 + 2*c2 + 4*c3; the
// most negative code -32 must be clamped to -31; nothing moves without we.
module tb_mk_chan_mem;
  localparam int Q = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic we;
  logic [3:0] idx;
  logic signed [Q-1:0] llr;
  logic [12*Q-1:0] lam0;

  mk_chan_mem u_dut (.clk, .rst_n, .we, .idx, .llr, .lam0);

  int val [12];
  int expq [12];

  initial begin
    int v;
    we = 0; idx = '0; llr = '0;
    for (int c1 = 0; c1 < 2; c1++)
      for (int c2 = 0; c2 < 2; c2++)
        for (int c3 = 0; c3 < 3; c3++)
          expq[6*c1 + 3*c2 + c3] = c1 + 2*c2 + 4*c3;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int n = 0; n < 12; n++) begin
        @(negedge clk);
        v = int'($urandom_range(0, 63)) - 32;
        val[n] = (v == -32) ? -31 : v;
        we = 1; idx = 4'(n); llr = Q'(v);
      end
      @(negedge clk);
      we = 0; idx = 4'($urandom_range(0, 11)); llr = Q'($urandom);
      @(negedge clk);
      for (int n = 0; n < 12; n++) begin
        checks++;
        if (int'($signed(lam0[expq[n]*Q +: Q])) != val[n]) begin
          failures++;
          $display("x_%0d at position %0d: %0d expected %0d", n, expq[n],
                   $signed(lam0[expq[n]*Q +: Q]), val[n]);
        end
      end
    end
    // clamp
    @(negedge clk);
    we = 1; idx = 4'd5; llr = -32;
    @(negedge clk);
    we = 0;
    checks++;
    if (int'($signed(lam0[expq[5]*Q +: Q])) != -31) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

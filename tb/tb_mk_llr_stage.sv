// tb_mk_llr_stage: checks mk_llr_stage at its default size (P = 2, M = 6,
// Q = 6) and a T3 stage (P = 3, M = 3). Random previous vectors, partial
// sums and function indices; each update must produce, one cycle later,
// the reference kernel function on the P consecutive inputs of every entry;
// without upd the vector must hold, and clr must zero it.
module tb_mk_llr_stage;
  import mk_tb_ref_pkg::*;

  localparam int Q = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr, upd2, upd3;
  logic [1:0] f2, f3;
  logic [6*2*Q-1:0] prev2;
  logic [6*1-1:0]   ps2;
  logic [6*Q-1:0]   lam2;
  logic [3*3*Q-1:0] prev3;
  logic [3*2-1:0]   ps3;
  logic [3*Q-1:0]   lam3;

  mk_llr_stage u_s2 (.clk, .rst_n, .clr, .upd(upd2), .func(f2), .prev_llr(prev2), .ps_in(ps2), .lam(lam2));
  mk_llr_stage #(.P(3), .M(3), .Q(Q)) u_s3 (.clk, .rst_n, .clr, .upd(upd3), .func(f3),
                                           .prev_llr(prev3), .ps_in(ps3), .lam(lam3));

  function automatic int rnd_llr();
    return int'($urandom_range(0, 2 * lmax(Q))) - lmax(Q);
  endfunction

  int e2 [6], e3 [3];

  task automatic compare(input string what);
    for (int k = 0; k < 6; k++) begin
      checks++;
      if (int'($signed(lam2[k*Q +: Q])) != e2[k]) begin
        failures++;
        $display("%s: T2 entry %0d = %0d expected %0d", what, k, $signed(lam2[k*Q +: Q]), e2[k]);
      end
    end
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (int'($signed(lam3[k*Q +: Q])) != e3[k]) begin
        failures++;
        $display("%s: T3 entry %0d = %0d expected %0d", what, k, $signed(lam3[k*Q +: Q]), e3[k]);
      end
    end
  endtask

  initial begin
    int L [3];
    bit up [3];
    int a2 [12], a3 [9];
    clr = 0; upd2 = 0; upd3 = 0; f2 = 0; f3 = 0; prev2 = '0; prev3 = '0; ps2 = '0; ps3 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 6; k++) e2[k] = 0;
    for (int k = 0; k < 3; k++) e3[k] = 0;
    @(negedge clk);
    compare("after reset");
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      upd2 = ($urandom_range(0, 3) != 0);
      upd3 = ($urandom_range(0, 3) != 0);
      f2 = 2'($urandom_range(0, 1));
      f3 = 2'($urandom_range(0, 2));
      for (int i = 0; i < 12; i++) begin a2[i] = rnd_llr(); prev2[i*Q +: Q] = Q'(a2[i]); end
      for (int i = 0; i < 9; i++)  begin a3[i] = rnd_llr(); prev3[i*Q +: Q] = Q'(a3[i]); end
      ps2 = 6'($urandom);
      ps3 = 6'($urandom);
      if (upd2) for (int k = 0; k < 6; k++) begin
        L[0] = a2[2*k]; L[1] = a2[2*k+1]; L[2] = 0;
        up[0] = ps2[k]; up[1] = 0; up[2] = 0;
        e2[k] = kfun(2, f2, L, up, Q);
      end
      if (upd3) for (int k = 0; k < 3; k++) begin
        L[0] = a3[3*k]; L[1] = a3[3*k+1]; L[2] = a3[3*k+2];
        up[0] = ps3[2*k]; up[1] = ps3[2*k+1]; up[2] = 0;
        e3[k] = kfun(3, f3, L, up, Q);
      end
      @(negedge clk);
      upd2 = 0; upd3 = 0;
      compare("update");
    end
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int k = 0; k < 6; k++) e2[k] = 0;
    for (int k = 0; k < 3; k++) e3[k] = 0;
    compare("clear");
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

// tb_mk_sc_decoder: end-to-end test of mk_sc_decoder at its default size
// (G_12 = T2 x T2 x T3, Q = 6). Noiseless codewords must decode to the sent
// bits, noisy ones must match the software SC reference bit for bit, and
// every codeword must take the scheduled number of cycles (mk_dec_driver).
// It also watches the controller and counts the scheme's mechanisms:
//   llr_skip   bits whose LLR update starts after Lambda_1
//   ps_bypass  Pi_s full: column of Pi_{s-1} written straight from u_i
//   ps_cascade partial-sum updates running on into a further matrix
//   ps_skip    no partial-sum update after the last bit
//   frozen_ovr frozen bit decided 0 against a negative LLR
// and checks the number of LLR-vector updates per codeword,
// p_1 + p_1 p_2 + ... + N, against the N*s of updating every vector.
module tb_mk_sc_decoder;
  import mk_pkg::*;

  localparam int unsigned S = 3;
  localparam int unsigned N = 12;
  localparam int unsigned Q = 6;
  localparam int unsigned IW = $clog2(N);
  localparam int unsigned NCW_CLEAN = 40;
  localparam int unsigned NCW_NOISY = 160;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                llr_we, start, busy, done, bit_valid, bit_val;
  logic [IW-1:0]       llr_idx, bit_idx;
  logic signed [Q-1:0] llr_in;
  logic [N-1:0]        frozen, u_hat;

  // two drivers share the decoder: noiseless first, then noisy
  logic                we_a, we_b, st_a, st_b;
  logic [IW-1:0]       idx_a, idx_b;
  logic signed [Q-1:0] llr_a, llr_b;
  logic [N-1:0]        fz_a, fz_b;
  int                  chk_a, chk_b, fail_a, fail_b;
  logic                fin_a, fin_b, rst_b;

  assign llr_we  = fin_a ? we_b  : we_a;
  assign llr_idx = fin_a ? idx_b : idx_a;
  assign llr_in  = fin_a ? llr_b : llr_a;
  assign frozen  = fin_a ? fz_b  : fz_a;
  assign start   = fin_a ? st_b  : st_a;
  assign rst_b   = rst_n && fin_a;

  mk_sc_decoder u_dut (
    .clk, .rst_n, .llr_we, .llr_idx, .llr_in, .frozen, .start,
    .busy, .done, .bit_valid, .bit_idx, .bit_val, .u_hat
  );

  mk_dec_driver #(.NCW(NCW_CLEAN), .NOISE(0)) u_clean (
    .clk, .rst_n, .llr_we(we_a), .llr_idx(idx_a), .llr_in(llr_a), .frozen(fz_a),
    .start(st_a), .busy, .done, .bit_valid(bit_valid && !fin_a), .bit_idx, .bit_val,
    .u_hat, .checks(chk_a), .failures(fail_a), .finished(fin_a)
  );

  mk_dec_driver #(.NCW(NCW_NOISY), .NOISE(12)) u_noisy (
    .clk, .rst_n(rst_b), .llr_we(we_b), .llr_idx(idx_b), .llr_in(llr_b), .frozen(fz_b),
    .start(st_b), .busy, .done, .bit_valid(bit_valid && fin_a), .bit_idx, .bit_val,
    .u_hat, .checks(chk_b), .failures(fail_b), .finished(fin_b)
  );

  // mechanism counters, from the controller's commands
  int llr_skip = 0, ps_bypass = 0, ps_cascade = 0, ps_skip = 0, frozen_ovr = 0;
  int vec_upd = 0, codewords = 0, vec_fail = 0;
  logic first_llr;
  always @(posedge clk) begin
    if (rst_n) begin
      if (u_dut.ctrl_state == ST_LLR && first_llr) begin
        if (!u_dut.lam_upd[1]) llr_skip++;
      end
      if (u_dut.lam_upd != '0) vec_upd++;
      if (u_dut.dec_en && u_dut.pi_we[S-1]) ps_bypass++;
      if (u_dut.ctrl_state == ST_PS) ps_cascade++;
      if (u_dut.dec_en && u_dut.idx == IW'(N - 1) && u_dut.pi_we == '0) ps_skip++;
      if (u_dut.dec_en && frozen[u_dut.idx] && u_dut.lam_bus[(N+6+3)*Q + Q - 1]) frozen_ovr++;
      if (done) begin
        codewords++;
        // p1 + p1*p2 + p1*p2*p3 = 2 + 4 + 12
        if (vec_upd != 18) begin
          vec_fail++;
          $display("LLR vector updates per codeword %0d, expected 18", vec_upd);
        end
        vec_upd = 0;
      end
    end
  end
  always @(posedge clk) first_llr <= (u_dut.ctrl_state != ST_LLR);

  int checks, failures;
  task automatic report();
    checks   = chk_a + chk_b + codewords + 5;
    failures = fail_a + fail_b + vec_fail;
    $display("mechanisms: llr_skip=%0d ps_bypass=%0d ps_cascade=%0d ps_skip=%0d frozen_ovr=%0d",
             llr_skip, ps_bypass, ps_cascade, ps_skip, frozen_ovr);
    if (llr_skip == 0)   failures++;
    if (ps_bypass == 0)  failures++;
    if (ps_cascade == 0) failures++;
    if (ps_skip == 0)    failures++;
    if (frozen_ovr == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin_b);
    repeat (2) @(posedge clk);
    report();
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    fail_a++;
    report();
    $finish;
  end

endmodule

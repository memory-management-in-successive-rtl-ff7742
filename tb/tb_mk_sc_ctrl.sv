// tb_mk_sc_ctrl: checks the decoding schedule of mk_sc_ctrl for the default
// code (kernels 2, 2, 3, N = 12) and for kernels 3, 2, 2. The expected
// command sequence is generated in software straight from the LLR-update
// and PS-update algorithms of the scheme (first vector z by repeated
// division of i; matrices Pi_{s-1}, Pi_{s-2}, ... updated while
// (i+1) is divisible by p_{j+1}, column ((i+1)/p_{j+1}-1) mod p_j); the
// last column of Pi_s is never written and no PS update follows the last
// bit. Every cycle from start to done is compared: which vector is updated
// with which function, which matrix column is written, and the decision
// cycles with their bit index; then done, busy and the total cycle count.
module tb_mk_sc_ctrl;
  import mk_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  typedef struct {
    int lam;      // updated LLR vector (0: none)
    int func;
    int pi;       // written PS matrix (0: none)
    int col;
    int dec;      // decided bit index (-1: none)
  } cmd_t;

  logic start_a, start_b;
  logic busy_a, done_a, clr_a, dec_a, busy_b, done_b, clr_b, dec_b;
  logic [3:1] lu_a, pw_a, lu_b, pw_b;
  logic [3:1][1:0] dg_a, dg_b;
  logic [3:0] ix_a, ix_b;
  sc_state_e st_a, st_b;

  mk_sc_ctrl u_a (.clk, .rst_n, .start(start_a), .busy(busy_a), .done(done_a), .clr(clr_a),
                  .lam_upd(lu_a), .pi_we(pw_a), .dec_en(dec_a), .digits(dg_a), .bit_idx(ix_a), .state(st_a));
  mk_sc_ctrl #(.S(3), .P('{3, 2, 2})) u_b (.clk, .rst_n, .start(start_b), .busy(busy_b), .done(done_b),
                  .clr(clr_b), .lam_upd(lu_b), .pi_we(pw_b), .dec_en(dec_b), .digits(dg_b), .bit_idx(ix_b),
                  .state(st_b));

  function automatic void schedule(input int p [3], output cmd_t q[$]);
    int s, n, z, ii, b, dig [3], rem;
    cmd_t c;
    s = 3;
    n = p[0] * p[1] * p[2];
    q = {};
    for (int i = 0; i < n; i++) begin
      rem = i;
      for (int t = 2; t >= 0; t--) begin dig[t] = rem % p[t]; rem = rem / p[t]; end
      // LLR update
      z = 1;
      if (i != 0) begin
        ii = i;
        for (int t = s; t >= 1; t--) begin
          z = t;
          if (ii % p[t-1] != 0) break;
          ii = ii / p[t-1];
        end
      end
      for (int j = z; j <= s; j++) begin
        c = '{lam: j, func: dig[j-1], pi: 0, col: 0, dec: -1};
        q.push_back(c);
      end
      // decision, with the first partial-sum write
      c = '{lam: 0, func: 0, pi: 0, col: 0, dec: i};
      if (i != n - 1) begin
        if (dig[s-1] != p[s-1] - 1) begin c.pi = s; c.col = dig[s-1]; end
      end
      // PS update chain
      if (i != n - 1) begin
        ii = i;
        for (int j = s - 1; j >= 1; j--) begin
          if ((ii + 1) % p[j] != 0) break;
          ii = (ii + 1) / p[j] - 1;
          b = ii % p[j-1];
          if (j == s - 1) begin c.pi = j; c.col = b; end
          else begin
            q.push_back(c);
            c = '{lam: 0, func: 0, pi: j, col: b, dec: -1};
          end
        end
      end
      q.push_back(c);
    end
  endfunction

  task automatic run(input int p [3], input bit which);
    cmd_t q[$];
    cmd_t got;
    int cyc, nl, np;
    schedule(p, q);
    @(negedge clk);
    if (which) start_b = 1; else start_a = 1;
    @(negedge clk);
    start_a = 0; start_b = 0;
    checks++;
    if ((which ? busy_b : busy_a) !== 1'b1) begin failures++; $display("busy not raised"); end
    cyc = 0;
    while (cyc < q.size()) begin
      logic [3:1] lu, pw;
      logic [3:1][1:0] dg;
      lu = which ? lu_b : lu_a;
      pw = which ? pw_b : pw_a;
      dg = which ? dg_b : dg_a;
      got = '{lam: 0, func: 0, pi: 0, col: 0, dec: -1};
      nl = 0; np = 0;
      for (int j = 1; j <= 3; j++) begin
        if (lu[j]) begin got.lam = j; got.func = int'(dg[j]); nl++; end
        if (pw[j]) begin got.pi = j; got.col = int'(dg[j]); np++; end
      end
      if (which ? dec_b : dec_a) got.dec = int'(which ? ix_b : ix_a);
      checks++;
      if (got != q[cyc] || nl > 1 || np > 1) begin
        failures++;
        $display("cycle %0d: lam %0d f%0d pi %0d col %0d dec %0d; expected lam %0d f%0d pi %0d col %0d dec %0d",
                 cyc, got.lam, got.func, got.pi, got.col, got.dec,
                 q[cyc].lam, q[cyc].func, q[cyc].pi, q[cyc].col, q[cyc].dec);
      end
      if (which ? done_b : done_a) break;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if ((which ? done_b : done_a) !== 1'b1) begin
      failures++;
      $display("done missing after %0d scheduled cycles", q.size());
    end
    @(negedge clk);
    checks++;
    if ((which ? busy_b : busy_a) !== 1'b0) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    start_a = 0; start_b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      run('{2, 2, 3}, 1'b0);
      run('{3, 2, 2}, 1'b1);
    end
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

// tb_mk_ps_stage: checks mk_ps_stage in its three shapes: an inner matrix
// (default P = 2, M = 3, W = 2), a last-stage matrix that does not store its
// last column (P = 3, M = 1, W = 2, last column from last_col) and a
// first-stage matrix (P = 2, M = 6, W = 1). Random column writes are applied
// to a software copy; after every cycle rows_lo must show the stored
// columns and next_col each row multiplied by the kernel matrix.
module tb_mk_ps_stage;
  import mk_tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr;
  // inner: P=2 M=3 W=2
  logic we_a; logic [1:0] col_a; logic [2:0] cd_a, lc_a; logic [2:0] rl_a; logic [5:0] nc_a;
  // last: P=3 M=1 W=2
  logic we_b; logic [1:0] col_b; logic [0:0] cd_b, lc_b; logic [1:0] rl_b; logic [2:0] nc_b;
  // first: P=2 M=6 W=1
  logic we_c; logic [1:0] col_c; logic [5:0] cd_c, lc_c; logic [5:0] rl_c; logic [11:0] nc_c;

  mk_ps_stage u_a (.clk, .rst_n, .clr, .we(we_a), .col(col_a), .col_data(cd_a), .last_col(lc_a),
                   .rows_lo(rl_a), .next_col(nc_a));
  mk_ps_stage #(.P(3), .M(1), .W(2)) u_b (.clk, .rst_n, .clr, .we(we_b), .col(col_b), .col_data(cd_b),
                   .last_col(lc_b), .rows_lo(rl_b), .next_col(nc_b));
  mk_ps_stage #(.P(2), .M(6), .W(1)) u_c (.clk, .rst_n, .clr, .we(we_c), .col(col_c), .col_data(cd_c),
                   .last_col(lc_c), .rows_lo(rl_c), .next_col(nc_c));

  bit ma [3][3], mb [1][3], mc [6][3];

  task automatic check_one(input string nm, input int p, input int m, input int w,
                           input bit mat [][3], input logic [15:0] rl, input logic [15:0] nc,
                           input logic [15:0] lc);
    bit row [3];
    bit e;
    for (int k = 0; k < m; k++) begin
      for (int c = 0; c < p; c++) row[c] = (c < w) ? mat[k][c] : lc[k];
      for (int c = 0; c < p - 1; c++) begin
        checks++;
        if (rl[k*(p-1)+c] !== row[c]) begin
          failures++;
          $display("%s row %0d col %0d: %b expected %b", nm, k, c, rl[k*(p-1)+c], row[c]);
        end
      end
      for (int c = 0; c < p; c++) begin
        e = 0;
        for (int r = 0; r < p; r++) e ^= row[r] & tker(p, r, c);
        checks++;
        if (nc[k*p+c] !== e) begin
          failures++;
          $display("%s next_col row %0d out %0d: %b expected %b", nm, k, c, nc[k*p+c], e);
        end
      end
    end
  endtask

  task automatic check_all();
    bit da [][3], db [][3], dc [][3];
    da = new[3]; db = new[1]; dc = new[6];
    foreach (ma[k]) da[k] = ma[k];
    foreach (mb[k]) db[k] = mb[k];
    foreach (mc[k]) dc[k] = mc[k];
    check_one("inner", 2, 3, 2, da, 16'(rl_a), 16'(nc_a), 16'(lc_a));
    check_one("last",  3, 1, 2, db, 16'(rl_b), 16'(nc_b), 16'(lc_b));
    check_one("first", 2, 6, 1, dc, 16'(rl_c), 16'(nc_c), 16'(lc_c));
  endtask

  initial begin
    clr = 0; we_a = 0; we_b = 0; we_c = 0; col_a = 0; col_b = 0; col_c = 0;
    cd_a = 0; cd_b = 0; cd_c = 0; lc_a = 0; lc_b = 0; lc_c = 0;
    foreach (ma[k, c]) ma[k][c] = 0;
    foreach (mb[k, c]) mb[k][c] = 0;
    foreach (mc[k, c]) mc[k][c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      we_a = bit'($urandom_range(0, 1)); col_a = 2'($urandom_range(0, 1)); cd_a = 3'($urandom); lc_a = 3'($urandom);
      we_b = bit'($urandom_range(0, 1)); col_b = 2'($urandom_range(0, 1)); cd_b = 1'($urandom); lc_b = 1'($urandom);
      we_c = bit'($urandom_range(0, 1)); col_c = 2'd0;                    cd_c = 6'($urandom); lc_c = 6'($urandom);
      if (it == 200) clr = 1;
      @(posedge clk);
      #1;
      if (clr) begin
        foreach (ma[k, c]) ma[k][c] = 0;
        foreach (mb[k, c]) mb[k][c] = 0;
        foreach (mc[k, c]) mc[k][c] = 0;
      end else begin
        if (we_a) for (int k = 0; k < 3; k++) ma[k][col_a] = cd_a[k];
        if (we_b) mb[0][col_b] = cd_b[0];
        if (we_c) for (int k = 0; k < 6; k++) mc[k][col_c] = cd_c[k];
      end
      clr = 0;
      check_all();
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

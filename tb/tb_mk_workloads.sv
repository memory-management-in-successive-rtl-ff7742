// tb_mk_workloads: runs the decoder at the code lengths of the memory
// comparison table, N = 72, 144, 384 and 972, built from kernels of size 2
// followed by kernels of size 3 (2,2,2,3,3 / 2,2,2,2,3,3 / 2^7,3 /
// 2,2,3,3,3,3,3). For each size a few codewords are decoded (mk_dec_driver:
// bit-exact against the software SC reference, cycle count against the
// schedule, noiseless ones against the sent bits), and the number of LLR
// entries the design instantiates, sum over j of p_{j+1}*...*p_s, is checked
// against that table: 139, 283, 766 and 1822.
module tb_mk_workloads;

  localparam int unsigned Q = 6;
  localparam int NW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int  chk [NW], fail [NW];
  logic fin [NW];

`define MK_WORKLOAD(ID, SS, PP, NN, NCW_, NOISE_) \
  begin : g_w``ID \
    localparam int unsigned IW = $clog2(NN); \
    logic llr_we, start, busy, done, bit_valid, bit_val; \
    logic [IW-1:0] llr_idx, bit_idx; \
    logic signed [Q-1:0] llr_in; \
    logic [NN-1:0] frozen, u_hat; \
    mk_sc_decoder #(.S(SS), .P(PP), .Q(Q)) u_dut ( \
      .clk, .rst_n, .llr_we, .llr_idx, .llr_in, .frozen, .start, \
      .busy, .done, .bit_valid, .bit_idx, .bit_val, .u_hat); \
    mk_dec_driver #(.S(SS), .P(PP), .Q(Q), .NCW(NCW_), .NOISE(NOISE_)) u_drv ( \
      .clk, .rst_n, .llr_we, .llr_idx, .llr_in, .frozen, .start, \
      .busy, .done, .bit_valid, .bit_idx, .bit_val, .u_hat, \
      .checks(chk[ID]), .failures(fail[ID]), .finished(fin[ID])); \
  end

  localparam int unsigned K72  [1:5] = '{2, 2, 2, 3, 3};
  localparam int unsigned K144 [1:6] = '{2, 2, 2, 2, 3, 3};
  localparam int unsigned K384 [1:8] = '{2, 2, 2, 2, 2, 2, 2, 3};
  localparam int unsigned K972 [1:7] = '{2, 2, 3, 3, 3, 3, 3};

  `MK_WORKLOAD(0, 5, K72, 72, 6, 10)
  `MK_WORKLOAD(1, 6, K144, 144, 4, 0)
  `MK_WORKLOAD(2, 8, K384, 384, 3, 10)
  `MK_WORKLOAD(3, 7, K972, 972, 2, 0)

  int checks, failures;
  task automatic report(input bit timeout);
    int ltot [NW];
    int want [NW] = '{139, 283, 766, 1822};
    checks = 0; failures = timeout ? 1 : 0;
    ltot[0] = g_w0.u_dut.LTOT;
    ltot[1] = g_w1.u_dut.LTOT;
    ltot[2] = g_w2.u_dut.LTOT;
    ltot[3] = g_w3.u_dut.LTOT;
    for (int w = 0; w < NW; w++) begin
      checks += chk[w] + 1;
      failures += fail[w];
      $display("workload %0d: LLR entries %0d (table %0d), checks %0d, failures %0d",
               w, ltot[w], want[w], chk[w], fail[w]);
      if (ltot[w] != want[w]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    report(1'b0);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    report(1'b1);
    $finish;
  end

endmodule

// tb_mk_hard_dec: exhaustive check of the bit decision (N = 12, Q = 6):
// frozen bits give 0; otherwise a negative LLR gives 1, zero or positive 0.
module tb_mk_hard_dec;
  int checks = 0, failures = 0;
  logic signed [5:0] llr;
  logic [3:0] idx;
  logic [11:0] frozen;
  logic u_bit;

  mk_hard_dec u_dut (.llr, .idx, .frozen, .u_bit);

  initial begin
    bit e;
    for (int v = -32; v < 32; v++)
      for (int i = 0; i < 12; i++)
        for (int f = 0; f < 2; f++) begin
          llr = 6'(v); idx = 4'(i);
          frozen = 12'($urandom);
          frozen[i] = f[0];
          #1;
          e = (f == 0) && (v < 0);
          checks++;
          if (u_bit !== e) begin
            failures++;
            $display("llr %0d idx %0d frozen %0d: %b expected %b", v, i, f, u_bit, e);
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

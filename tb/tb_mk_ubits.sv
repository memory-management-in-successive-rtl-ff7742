// tb_mk_ubits: random writes to the decoded-bit vector (N = 12) against a
// software copy; clr must zero it.
module tb_mk_ubits;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic clr, we, bit_in;
  logic [3:0] idx;
  logic [11:0] u_hat, model;

  mk_ubits u_dut (.clk, .rst_n, .clr, .we, .idx, .bit_in, .u_hat);

  initial begin
    clr = 0; we = 0; idx = 0; bit_in = 0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      we = bit'($urandom_range(0, 1)); idx = 4'($urandom_range(0, 11)); bit_in = bit'($urandom_range(0, 1));
      clr = (it % 97 == 96);
      @(posedge clk);
      if (clr) model = '0;
      else if (we) model[idx] = bit_in;
      #1;
      checks++;
      if (u_hat !== model) begin
        failures++;
        $display("u_hat %b expected %b", u_hat, model);
      end
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

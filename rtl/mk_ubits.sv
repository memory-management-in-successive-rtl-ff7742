// mk_ubits: decoded-bit vector Upsilon.
//
// N single-bit entries, one per decoded bit u_i. Entry idx is written with
// bit_in on a clock edge where we is high; clr (start of a codeword) and reset
// zero the whole vector. The vector is always visible on u_hat, bit i = u_i,
// and stays valid after decoding until the next clr.
// Flip-flop storage and the clear at start are this design's choices.
module mk_ubits #(
  parameter int unsigned N  = 12,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          we,
  input  logic [IW-1:0] idx,
  input  logic          bit_in,
  output logic [N-1:0]  u_hat
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        u_hat      <= '0;
    else if (clr)      u_hat      <= '0;
    else if (we)       u_hat[idx] <= bit_in;
  end

endmodule

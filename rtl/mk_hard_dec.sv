// mk_hard_dec: estimation of the current bit u_i.
//
// A frozen bit (frozen[idx] = 1) is decided as 0. Otherwise the bit is the
// hard decision on the LLR of u_i held in Lambda_s(0): a negative LLR gives 1,
// a zero or positive one gives 0. Combinational.
// The sign convention (negative = 1) is the one the scheme states in words;
// its decision formula (sgn+1)/2 would give the opposite, and is not used.
module mk_hard_dec #(
  parameter int unsigned N  = 12,
  parameter int unsigned Q  = 6,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [Q-1:0] llr,
  input  logic [IW-1:0]       idx,
  input  logic [N-1:0]        frozen,
  output logic                u_bit
);

  assign u_bit = frozen[idx] ? 1'b0 : llr[Q-1];

endmodule

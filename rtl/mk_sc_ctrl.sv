// mk_sc_ctrl: schedule of the multi-kernel SC decoder.
//
// Walks the bit index i = 0..N-1, kept as its mixed-radix digits
// b_1..b_s (radices p_1..p_s, b_s least significant). For every bit it runs
//   LLR:  one cycle per LLR vector, Lambda_z .. Lambda_s, where z is the
//         position of the rightmost nonzero digit of i (z = 1 for i = 0);
//         vector Lambda_j uses function f_{b_j}: all digits right of z are 0.
//   DEC:  one cycle; u_i is decided and written to Upsilon. Unless i = N-1,
//         u_i is also written to column b_s of Pi_s or, if b_s = p_s-1, the
//         completed row [Pi_s, u_i] * T_{p_s} is written to column b_{s-1}
//         of Pi_{s-1} (Pi_s does not store its last column).
//   PS:   one cycle per further matrix: while the column just written to
//         Pi_j was its last (b_j = p_j-1) and j >= 2, Pi_j * T_{p_j} goes to
//         column b_{j-1} of Pi_{j-1}.
// Then the digits are incremented; the carry stops at the new z.
// The partial-sum update is skipped after the last bit.
// Interface: start (one cycle, while idle) begins a codeword and pulses clr
// for the memories; done is high for one cycle after u_{N-1} is written;
// busy is high from the cycle after start until done. lam_upd[j], pi_we[j]
// and dec_en are the per-cycle commands, digits[j] = b_j selects the kernel
// function of Lambda_j and the column written in Pi_j.
// Cycles per bit: (s-z+1) + 1 + max(m-1,0), m = number of trailing digits
// equal to p-1 (no PS cycles for the last bit); plus one cycle for DONE.
// The order of the updates and the start vector z follow the scheme; the
// cycle timing and the start/busy/done handshake are this design's choices.
module mk_sc_ctrl
  import mk_pkg::*;
#(
  parameter int unsigned S = 3,
  parameter int unsigned P [1:S] = '{2, 2, 3},
  localparam int unsigned N  = prod_all(),
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic                  clr,
  output logic [S:1]            lam_upd,
  output logic [S:1]            pi_we,
  output logic                  dec_en,
  output logic [S:1][DIGIT_W-1:0] digits,
  output logic [IW-1:0]         bit_idx,
  output sc_state_e             state
);

  function automatic int unsigned prod_all();
    int unsigned r = 1;
    for (int unsigned t = 1; t <= S; t++) r *= P[t];
    return r;
  endfunction

  localparam int unsigned SW = $clog2(S + 1);

  if (S < 2) begin : g_bad_s
    $error("mk_sc_ctrl: at least two kernels are required");
  end

  digit_t        dig [1:S];
  logic [SW-1:0] j;          // stage pointer
  logic [IW-1:0] idx;
  logic [SW-1:0] z_next;     // first LLR vector to update for bit i+1
  logic          last_bit;

  function automatic logic is_max(input int unsigned t, input digit_t d);
    return 32'(d) == P[t] - 1;
  endfunction

  assign last_bit = (32'(idx) == N - 1);
  assign bit_idx  = idx;
  assign busy     = (state != ST_IDLE);

  // Rightmost digit that is not at its maximum: the increment carries up to it.
  always_comb begin
    z_next = SW'(1);
    for (int unsigned t = 1; t <= S; t++) begin
      if (!is_max(t, dig[t])) z_next = SW'(t);
    end
  end

  always_comb begin
    lam_upd = '0;
    pi_we   = '0;
    dec_en  = 1'b0;
    done    = 1'b0;
    clr     = (state == ST_IDLE) && start;
    for (int unsigned t = 1; t <= S; t++) digits[t] = dig[t];
    case (state)
      ST_LLR:  lam_upd[j] = 1'b1;
      ST_DEC: begin
        dec_en = 1'b1;
        if (!last_bit) begin
          if (!is_max(S, dig[S])) pi_we[S]   = 1'b1;
          else                    pi_we[S-1] = 1'b1;
        end
      end
      ST_PS:   pi_we[j-1] = 1'b1;
      ST_DONE: done = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      j     <= SW'(1);
      idx   <= '0;
      for (int unsigned t = 1; t <= S; t++) dig[t] <= '0;
    end else begin
      case (state)
        ST_IDLE: if (start) begin
          state <= ST_LLR;
          j     <= SW'(1);
          idx   <= '0;
          for (int unsigned t = 1; t <= S; t++) dig[t] <= '0;
        end
        ST_LLR: begin
          if (32'(j) == S) state <= ST_DEC;
          else             j     <= j + SW'(1);
        end
        ST_DEC, ST_PS: begin
          if (state == ST_DEC && last_bit) begin
            state <= ST_DONE;
          end else if (state == ST_DEC && is_max(S, dig[S]) && S - 1 >= 2 && is_max(S-1, dig[S-1])) begin
            state <= ST_PS;
            j     <= SW'(S - 1);
          end else if (state == ST_PS && 32'(j) - 1 >= 2 && is_max(32'(j) - 1, dig[j-1])) begin
            j     <= j - SW'(1);
          end else begin
            // next bit: mixed-radix increment
            state <= ST_LLR;
            idx   <= idx + IW'(1);
            j     <= z_next;
            for (int unsigned t = 1; t <= S; t++) begin
              if (t > 32'(z_next))       dig[t] <= '0;
              else if (t == 32'(z_next)) dig[t] <= dig[t] + digit_t'(1);
            end
          end
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  // start is only taken while idle
  assert property (@(posedge clk) disable iff (!rst_n) (state == ST_IDLE && start) |=> busy);
  // exactly one memory is written in a PS cycle, and never Pi_0
  assert property (@(posedge clk) disable iff (!rst_n) (state == ST_PS) |-> (j >= SW'(2)));

endmodule

// mk_pkg: constants, types and kernel tables shared by the multi-kernel
// successive-cancellation (SC) decoder.
//
// The decoder supports the two binary kernels used throughout the design,
//   T2 = [1 0; 1 1]      and      T3 = [1 1 1; 1 0 1; 0 1 1],
// so a mixed-radix digit of the bit index is at most 2 and fits DIGIT_W=2
// bits. kernel_col() returns column c of T_p as a row mask: bit r of the
// result is T_p[r][c], so the partial sum x_c = XOR of (u & kernel_col(p,c)).
// The controller state type is shared by the controller and the top level.
package mk_pkg;

  localparam int unsigned MAX_P   = 3;  // largest supported kernel
  localparam int unsigned DIGIT_W = 2;  // bits of one mixed-radix digit

  typedef logic [DIGIT_W-1:0] digit_t;

  // Decoder phases, following the per-bit loop of SC decoding:
  // LLR update, u_i estimation (DEC), partial-sum update (PS).
  typedef enum logic [2:0] {
    ST_IDLE = 3'd0,
    ST_LLR  = 3'd1,
    ST_DEC  = 3'd2,
    ST_PS   = 3'd3,
    ST_DONE = 3'd4
  } sc_state_e;

  // Column c of kernel T_p, bit r = T_p[r][c].
  function automatic logic [MAX_P-1:0] kernel_col(input int unsigned p, input int unsigned c);
    logic [MAX_P-1:0] m;
    m = '0;
    if (p == 2) begin
      case (c)
        0:       m = 3'b011;   // T2 column 0: rows 0,1
        default: m = 3'b010;   // T2 column 1: row 1
      endcase
    end else begin
      case (c)
        0:       m = 3'b011;   // T3 column 0: rows 0,1
        1:       m = 3'b101;   // T3 column 1: rows 0,2
        default: m = 3'b111;   // T3 column 2: rows 0,1,2
      endcase
    end
    return m;
  endfunction

endpackage

// mk_ps_stage: partial-sum matrix Pi_j of decoding stage j and its PS update.
//
// Pi_j has M = p_{j+1}*...*p_s rows and W columns; row k holds the partial
// sums u_0..u_{W-1} of kernel k of stage j (kernel size P = p_j). Column col
// is written at once from col_data (bit k -> row k) when we is high.
// W is P for inner stages. For the last stage s the last column is never
// stored, because it would be consumed in the very cycle it is produced; for
// stage 1 it is never needed, because it would only be complete after the
// last bit. Both use W = P-1 and take the missing column from last_col.
// next_col is the column this matrix hands to Pi_{j-1}: for every row k the
// kernel PS update [Pi_j(k,0..P-1)] * T_P, with output c placed at bit k*P+c.
// rows_lo gives columns 0..P-2 of every row to the LLR kernels of stage j,
// row k at bits [k*(P-1) +: P-1]. Writes are synchronous; next_col and
// rows_lo are combinational from the stored matrix (and last_col).
// The column widths follow the memory drawing of the length-12 example, which
// gives Pi_1 one column less than the general rule in the text (p_j).
module mk_ps_stage #(
  parameter int unsigned P = 2,
  parameter int unsigned M = 3,
  parameter int unsigned W = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 we,
  input  logic [1:0]           col,
  input  logic [M-1:0]         col_data,
  input  logic [M-1:0]         last_col,
  output logic [M*(P-1)-1:0]   rows_lo,
  output logic [M*P-1:0]       next_col
);

  if (W != P && W != P-1) begin : g_bad_w
    $error("mk_ps_stage: width must be P or P-1");
  end

  logic [W-1:0] pi [M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < M; k++) pi[k] <= '0;
    end else if (clr) begin
      for (int k = 0; k < M; k++) pi[k] <= '0;
    end else if (we) begin
      for (int k = 0; k < M; k++)
        for (int c = 0; c < W; c++)
          if (32'(col) == c) pi[k][c] <= col_data[k];
    end
  end

  for (genvar k = 0; k < M; k++) begin : g_row
    logic [P-1:0] row;
    if (W == P) begin : g_full
      assign row = P'(pi[k]);
    end else begin : g_short
      assign row = {last_col[k], (P-1)'(pi[k])};
    end
    assign rows_lo[k*(P-1) +: (P-1)] = row[P-2:0];
    mk_kernel_ps #(.P(P)) u_ps (
      .u_in  (row),
      .x_out (next_col[k*P +: P])
    );
  end

  assert property (@(posedge clk) disable iff (!rst_n) we |-> (32'(col) < W))
    else $error("mk_ps_stage: column %0d written, matrix has %0d", col, W);

endmodule

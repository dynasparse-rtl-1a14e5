// Layout Merger on the Result Buffer's way out to external memory.
//
// A task may leave two partial results of Z in the Result Buffer: one in
// row-major order (the row region) and one in column-major order (the column
// region, written when the sparse operand was the right-hand matrix and the
// core computed Z^T).  On the way out the merger combines them into
// row-major order: out[k] = row_word[k] (op) colreg[k][row], using the task's
// reduce operator.  The column region holds N rows of Z^T, i.e. columns of a
// Z with at most N rows; rows at or above N take the row word only.  The
// paper states the function only; the register-array column region and the
// one-cycle pipeline are this design's choices.
//
// Timing: one row per cycle, out_* one cycle after in_*.
module layout_merger
  import dyn_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic [IDX_W-1:0]         in_row,
  input  logic [N-1:0][DATA_W-1:0] row_word,
  input  logic                     col_en,
  input  logic [N-1:0][DATA_W-1:0] colreg [N],   // colreg[k] = column k of Z
  input  agg_e                     agg,
  output logic                     out_valid,
  output logic [IDX_W-1:0]         out_row,
  output logic [N-1:0][DATA_W-1:0] out_word
);
  logic [N-1:0][DATA_W-1:0] m;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      if (col_en && in_row < IDX_W'(N))
        m[k] = alu_f(agg2op(agg), row_word[k], colreg[k][in_row[$clog2(N)-1:0]], '0);
      else
        m[k] = row_word[k];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    out_row  <= in_row;
    out_word <= m;
  end
endmodule

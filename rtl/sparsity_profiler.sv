// Sparsity Profiler at the output port of the Result Buffer.
//
// Counts the non-zero elements of the partition being stored so the soft
// processor can choose the primitive for the next kernel.  As in the paper it
// is a comparator array (one "!= 0" per element) feeding an adder tree; here
// the tree is pipelined with one register level per tree level, followed by
// an accumulator.  clr starts a new count; in_valid marks an N-element row.
//
// Timing: a row presented in cycle t is included in nnz from cycle
// t + log2(N) + 1 on; busy is high while rows are still inside the tree.
// total counts all elements seen since clr.
module sparsity_profiler #(
  parameter int N  = 16,
  parameter int W  = 32,
  parameter int CW = 32
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                clr,
  input  logic                in_valid,
  input  logic [N-1:0][W-1:0] in_vals,
  output logic [CW-1:0]       nnz,
  output logic [CW-1:0]       total,
  output logic                busy
);
  localparam int L  = $clog2(N);
  localparam int SW = $clog2(N+1);

  logic [SW-1:0] lvl [L+1][N];
  logic [L:0]    vld;

  always_comb begin
    for (int p = 0; p < N; p++) lvl[0][p] = SW'(in_vals[p] != '0);
    vld[0] = in_valid;
  end

  for (genvar l = 1; l <= L; l++) begin : g_tree
    always_ff @(posedge clk) begin
      if (rst || clr) vld[l] <= 1'b0;
      else            vld[l] <= vld[l-1];
      for (int p = 0; p < (N >> l); p++)
        lvl[l][p] <= lvl[l-1][2*p] + lvl[l-1][2*p+1];
      for (int p = (N >> l); p < N; p++)
        lvl[l][p] <= '0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      nnz   <= '0;
      total <= '0;
    end else begin
      if (vld[L])   nnz   <= nnz + CW'(lvl[L][0]);
      if (in_valid) total <= total + CW'(N);
    end
  end

  assign busy = |vld;
endmodule

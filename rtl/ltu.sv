// Layout Transformation Unit (LTU): row-major <-> column-major.
//
// Changing the layout of a matrix is transposing it.  The paper builds the
// LTU from a streaming permutation network of the literature and gives no
// details; this implementation is the simplest unit with the same stream
// behaviour: two N x N register blocks used in ping-pong.  N rows of N
// elements are written into one block, one row per cycle, while the other
// block is read out one column per cycle.  The side-band SB of the first row
// of a block is returned with its columns.
//
// Interface: in_valid/in_ready for rows; out_valid with out_idx = column
// number 0..N-1 of the block; the consumer always accepts.  A block's first
// column appears the cycle after its last row was written; sustained
// throughput is one row in and one column out per cycle.
module ltu #(
  parameter int  N  = 16,
  parameter int  W  = 32,
  parameter type SB = logic [31:0]
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [N-1:0][W-1:0] in_vals,
  input  SB                   in_sb,
  output logic                out_valid,
  output logic [$clog2(N)-1:0] out_idx,
  output logic [N-1:0][W-1:0] out_vals,
  output SB                   out_sb
);
  localparam int IW = $clog2(N);

  logic [N-1:0][W-1:0] blk [2][N];   // blk[b][row][col]
  SB                   bsb [2];
  logic [1:0]          full;
  logic                wsel, rsel;
  logic [IW-1:0]       wrow, rcol;

  assign in_ready  = !full[wsel];
  assign out_valid = full[rsel];
  assign out_idx   = rcol;
  assign out_sb    = bsb[rsel];

  always_comb
    for (int r = 0; r < N; r++) out_vals[r] = blk[rsel][r][rcol];

  always_ff @(posedge clk) begin
    if (rst) begin
      full <= '0;
      wsel <= 1'b0;
      rsel <= 1'b0;
      wrow <= '0;
      rcol <= '0;
    end else begin
      if (in_valid && in_ready) begin
        blk[wsel][wrow] <= in_vals;
        if (wrow == '0) bsb[wsel] <= in_sb;
        wrow <= wrow + 1'b1;
        if (wrow == IW'(N-1)) begin
          full[wsel] <= 1'b1;
          wsel       <= !wsel;
        end
      end
      if (full[rsel]) begin
        rcol <= rcol + 1'b1;
        if (rcol == IW'(N-1)) begin
          full[rsel] <= 1'b0;
          rsel       <= !rsel;
        end
      end
    end
  end
endmodule

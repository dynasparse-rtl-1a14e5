// Sparse-to-Dense (S2D) module of the Format Transformation Module.
//
// The reverse of D2S: takes up to N compacted (column, value) entries per
// cycle, listed in ascending column order in slots 0..cnt-1, and places each
// value at its column, filling the other positions with zero.  Each entry's
// shift distance is (column - slot), the number of zeros in front of it in
// the dense array; log2(N) pipeline stages shift right by 2^(i-1), taken from
// the most significant bit down so that the network is D2S run backwards
// ("similar to D2S, but in the reverse direction").  The exact stage order is
// this design's reading of that sentence.
//
// Timing: out_valid follows in_valid by log2(N) cycles; no back-pressure.
module s2d #(
  parameter int  N  = 16,
  parameter int  W  = 32,
  parameter type SB = logic [31:0]
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [N-1:0][W-1:0]         in_vals,
  input  logic [N-1:0][$clog2(N)-1:0] in_cols,
  input  logic [$clog2(N+1)-1:0]      in_cnt,
  input  SB                           in_sb,
  output logic                        out_valid,
  output logic [N-1:0][W-1:0]         out_vals,
  output SB                           out_sb
);
  localparam int S  = $clog2(N);
  localparam int CW = $clog2(N);

  typedef struct packed {
    logic          v;
    logic [CW-1:0] d;      // remaining right-shift distance
    logic [W-1:0]  val;
  } el_t;

  el_t  st  [S+1][N];
  logic vld [S+1];
  SB    sb  [S+1];

  always_comb begin
    for (int p = 0; p < N; p++) begin
      st[0][p].v   = (p < int'(in_cnt));
      st[0][p].d   = in_cols[p] - CW'(p);
      st[0][p].val = in_vals[p];
    end
    vld[0] = in_valid;
    sb[0]  = in_sb;
  end

  // Stage i handles bit b = S-i (most significant first).
  for (genvar i = 1; i <= S; i++) begin : g_stage
    localparam int B  = S - i;
    localparam int SH = 1 << B;
    el_t nxt [N];
    always_comb begin
      for (int p = 0; p < N; p++) begin
        nxt[p] = '0;
        if (p >= SH && st[i-1][p-SH].v && st[i-1][p-SH].d[B])
          nxt[p] = st[i-1][p-SH];
        else if (st[i-1][p].v && !st[i-1][p].d[B])
          nxt[p] = st[i-1][p];
      end
    end
    always_ff @(posedge clk) begin
      if (rst) vld[i] <= 1'b0;
      else     vld[i] <= vld[i-1];
      st[i] <= nxt;
      sb[i] <= sb[i-1];
    end
  end

  always_comb begin
    out_valid = vld[S];
    out_sb    = sb[S];
    for (int p = 0; p < N; p++)
      out_vals[p] = st[S][p].v ? st[S][p].val : '0;
  end
endmodule

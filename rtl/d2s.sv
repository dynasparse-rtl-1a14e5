// Dense-to-Sparse (D2S) module of the Format Transformation Module.
//
// Takes N dense elements per cycle and emits the non-zeros packed to the low
// positions together with their original positions (column indices) and
// their count, at a throughput of N elements per cycle.  Structure as in the
// paper: the prefix sum of each element is the number of zeros before it;
// the array then passes log2(N) pipeline stages, and in stage i (1-based) an
// element moves left by 2^(i-1) positions when bit (i-1) of its prefix sum is
// 1.  Zeros are dropped.  The prefix sum is computed combinationally in front
// of stage 1; the side-band value SB travels alongside unchanged.
//
// Timing: out_valid follows in_valid by log2(N) cycles; no back-pressure.
// Output slots at and above out_cnt hold zeros.
module d2s #(
  parameter int  N  = 16,
  parameter int  W  = 32,
  parameter type SB = logic [31:0]
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic                        in_valid,
  input  logic [N-1:0][W-1:0]         in_vals,
  input  SB                           in_sb,
  output logic                        out_valid,
  output logic [N-1:0][W-1:0]         out_vals,
  output logic [N-1:0][$clog2(N)-1:0] out_cols,
  output logic [$clog2(N+1)-1:0]      out_cnt,
  output SB                           out_sb
);
  localparam int S  = $clog2(N);
  localparam int CW = $clog2(N);
  localparam int PW = $clog2(N+1);

  typedef struct packed {
    logic          v;      // element is a non-zero
    logic [PW-1:0] ps;     // remaining prefix sum (zeros before it)
    logic [CW-1:0] col;    // original position
    logic [W-1:0]  val;
  } el_t;

  el_t           st    [S+1][N];
  logic          vld   [S+1];
  logic [PW-1:0] cnt   [S+1];
  SB             sb    [S+1];

  // Stage 0: prefix sum of zeros (combinational).
  always_comb begin
    logic [PW-1:0] z;
    logic [PW-1:0] nz;
    z  = '0;
    nz = '0;
    for (int p = 0; p < N; p++) begin
      st[0][p].v   = (in_vals[p] != '0);
      st[0][p].ps  = z;
      st[0][p].col = CW'(p);
      st[0][p].val = in_vals[p];
      if (in_vals[p] == '0) z = z + 1'b1;
      else                  nz = nz + 1'b1;
    end
    vld[0] = in_valid;
    cnt[0] = nz;
    sb[0]  = in_sb;
  end

  // Stages 1..S: conditional left shift by 2^(i-1).
  for (genvar i = 1; i <= S; i++) begin : g_stage
    localparam int SH = 1 << (i-1);
    el_t nxt [N];
    always_comb begin
      for (int p = 0; p < N; p++) begin
        nxt[p] = '0;
        if (p + SH < N && st[i-1][p+SH].v && st[i-1][p+SH].ps[i-1])
          nxt[p] = st[i-1][p+SH];
        else if (st[i-1][p].v && !st[i-1][p].ps[i-1])
          nxt[p] = st[i-1][p];
      end
    end
    always_ff @(posedge clk) begin
      if (rst) vld[i] <= 1'b0;
      else     vld[i] <= vld[i-1];
      st[i]  <= nxt;
      cnt[i] <= cnt[i-1];
      sb[i]  <= sb[i-1];
    end
  end

  always_comb begin
    out_valid = vld[S];
    out_cnt   = cnt[S];
    out_sb    = sb[S];
    for (int p = 0; p < N; p++) begin
      out_vals[p] = st[S][p].v ? st[S][p].val : '0;
      out_cols[p] = st[S][p].v ? st[S][p].col : '0;
    end
  end
endmodule

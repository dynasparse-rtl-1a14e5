// Sparse Data Queue (SQ) of one Sparse Computation Pipeline (SPMM mode).
//
// Holds the partial result of one output row Z[j] in sparse form: up to N
// (column, value) entries in arrival order.  The SCP looks up the column of
// each new product (hit / old_val), has its merge ALU combine the two, and
// writes the result back: an existing entry is overwritten, a new column is
// appended.  load fills the queue from a dense row read from the Result
// Buffer (its non-zeros, in column order); dense_out scatters the entries
// back into a dense row for storing.  The paper gives the SQ's role only;
// the CAM-style lookup and the dense load/flush ports are this design's.
//
// Priority within a cycle: clr, then load, then wr.  All lookups are
// combinational on the registered contents.
module sparse_queue
  import dyn_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     clr,
  input  logic                     load,
  input  logic [N-1:0][DATA_W-1:0] load_vals,
  input  logic [$clog2(N)-1:0]     lk_col,
  output logic                     hit,
  output data_t                    old_val,
  input  logic                     wr,
  input  data_t                    wr_val,
  output logic [N-1:0][DATA_W-1:0] dense_out,
  output logic [$clog2(N+1)-1:0]   cnt
);
  localparam int CW = $clog2(N);

  logic [CW-1:0] ecol [N];
  data_t         eval [N];
  logic [$clog2(N)-1:0] hit_idx;

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    old_val = '0;
    for (int e = 0; e < N; e++)
      if (e < int'(cnt) && ecol[e] == lk_col && !hit) begin
        hit     = 1'b1;
        hit_idx = CW'(e);
        old_val = eval[e];
      end
    dense_out = '0;
    for (int e = 0; e < N; e++)
      if (e < int'(cnt)) dense_out[ecol[e]] = eval[e];
  end

  always_ff @(posedge clk) begin
    if (rst || clr) begin
      cnt <= '0;
    end else if (load) begin
      automatic int k = 0;
      for (int c = 0; c < N; c++)
        if (load_vals[c] != '0) begin
          ecol[k] <= CW'(c);
          eval[k] <= load_vals[c];
          k++;
        end
      cnt <= ($clog2(N+1))'(k);
    end else if (wr) begin
      if (hit) eval[hit_idx] <= wr_val;
      else begin
        ecol[cnt[CW-1:0]] <= lk_col;
        eval[cnt[CW-1:0]] <= wr_val;
        cnt               <= cnt + 1'b1;
      end
    end
  end

  // A row has at most N distinct columns, so an append never overflows.
  a_no_overflow: assert property (@(posedge clk) disable iff (rst) (wr && !hit && !clr && !load) |-> cnt < ($clog2(N+1))'(N));
endmodule

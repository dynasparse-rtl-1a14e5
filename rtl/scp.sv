// Sparse Computation Pipeline (SCP), one per row of the ALU array in SPMM mode.
//
// Row-wise product with scatter-gather: an SCP owns the output rows j with
// j mod P = its index.  It receives pairs (e, Y[i]) from the Data Shuffle
// Network, where e = X[j][i] and Y[i] is a packed sparse row, queues them in
// a small input buffer (the "Buf" in front of the ALU array), and for every
// non-zero Y[i][k] multiplies e.value * Y[i][k] in its first ALU and merges
// the product into Z[j][k] in its Sparse Data Queue with its second ALU
// (the two ALUs live in alu_array; this module drives them).
// When a pair for a different row arrives, the SQ is written back to the
// Result Buffer and loaded with the new row (one cycle: the old row is
// written while the new one is read).  flush writes the SQ back at the end
// of a task.  Because the Result Buffer keeps every partial row, the result
// does not depend on the order in which pairs arrive.
//
// Timing: one multiply per cycle when busy (P MACs/cycle for P SCPs); a row
// change costs one cycle; the merge is one cycle behind the multiply.
module scp
  import dyn_pkg::*;
#(
  parameter int P      = 16,
  parameter int FIFO_D = 4
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,      // task start: SQ empty
  input  logic                     flush,      // write SQ back and empty it
  // pairs from the DSN
  input  logic                     in_valid,
  output logic                     in_ready,
  input  coo_t                     in_e,
  input  oword_t                   in_y,
  // ALU array ports (SCP row)
  output logic                     mul_en,
  output data_t                    mul_a,
  output data_t                    mul_b,
  input  data_t                    prod,
  output data_t                    merge_a,
  output data_t                    merge_b,
  input  data_t                    merge_y,
  // Result Buffer row port (bank of this SCP)
  output logic [IDX_W-1:0]         rb_rrow,
  input  logic [P-1:0][DATA_W-1:0] rb_rdata,
  output logic                     rb_we,
  output logic [IDX_W-1:0]         rb_wrow,
  output logic [P-1:0][DATA_W-1:0] rb_wdata,
  // status
  output logic                     pop,        // one pair finished
  output logic                     busy,
  output logic                     row_switch  // SQ written back and reloaded
);
  localparam int CW = $clog2(P);
  localparam int FW = $clog2(FIFO_D);

  coo_t   fe [FIFO_D];
  oword_t fy [FIFO_D];
  logic [FW-1:0] rp, wp;
  logic [FW:0]   cnt;
  logic [CW:0]   k;             // next non-zero of the head's Y row
  logic          sq_v;
  logic [IDX_W-1:0] jq;
  logic          pm_v;
  logic [CW-1:0] pm_col;

  coo_t   he;
  oword_t hy;
  logic   hv, do_mul, do_switch, last;

  logic                     sq_hit, sq_wr, sq_load, sq_clr;
  data_t                    sq_old;
  logic [P-1:0][DATA_W-1:0] sq_dense;
  logic [$clog2(P+1)-1:0]   sq_cnt;

  assign hv = (cnt != '0);
  assign he = fe[rp];
  assign hy = fy[rp];
  assign in_ready = (cnt != (FW+1)'(FIFO_D));

  always_comb begin
    do_switch = hv && !flush && !pm_v && (!sq_v || he.row != jq);
    do_mul    = hv && !flush && sq_v && he.row == jq && (hy.nnz != '0);
    last      = (hy.nnz == '0) || (k + 1'b1 >= (CW+1)'(hy.nnz));
    pop       = hv && !flush && sq_v && he.row == jq && last;
    mul_en    = do_mul;
    mul_a     = he.val;
    mul_b     = data_t'(hy.vals[k[CW-1:0]]);
    merge_a   = prod;
    merge_b   = sq_old;
    sq_wr     = pm_v;
    sq_load   = do_switch;
    sq_clr    = start || flush;
    rb_rrow   = he.row;
    rb_we     = (do_switch && sq_v) || (flush && sq_v);
    rb_wrow   = jq;
    rb_wdata  = sq_dense;
    row_switch = do_switch && sq_v;
    busy      = hv || pm_v;
  end

  sparse_queue #(.N(P)) u_sq (
    .clk, .rst, .clr(sq_clr), .load(sq_load), .load_vals(rb_rdata),
    .lk_col(pm_col), .hit(sq_hit), .old_val(sq_old),
    .wr(sq_wr), .wr_val(sq_hit ? merge_y : prod),
    .dense_out(sq_dense), .cnt(sq_cnt)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      rp <= '0; wp <= '0; cnt <= '0; k <= '0;
      sq_v <= 1'b0; pm_v <= 1'b0; jq <= '0; pm_col <= '0;
    end else begin
      if (in_valid && in_ready) begin
        fe[wp] <= in_e;
        fy[wp] <= in_y;
        wp     <= wp + 1'b1;
      end
      cnt <= cnt + (FW+1)'(in_valid && in_ready) - (FW+1)'(pop);
      if (pop) begin
        rp <= rp + 1'b1;
        k  <= '0;
      end else if (do_mul) begin
        k <= k + 1'b1;
      end
      pm_v   <= do_mul;
      pm_col <= hy.cols[k[CW-1:0]];
      if (start || flush) sq_v <= 1'b0;
      else if (do_switch) begin
        sq_v <= 1'b1;
        jq   <= he.row;
      end
    end
  end

  a_no_flush_busy: assert property (@(posedge clk) disable iff (rst) flush |-> !pm_v);
endmodule

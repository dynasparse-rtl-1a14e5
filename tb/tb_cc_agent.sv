// Testbench agent for one Computation Core of the top level.  It models the
// part of the runtime system that runs per core and the external memory:
// it repeatedly asks the scheduler in tb_dynasparse_top for the next kernel
// (dynamic scheduling: whichever core is idle first takes the next one),
// generates the kernel's operands X (m x n) and Y (n x P), measures their
// densities and applies the K2P rule of the runtime
//   min density 0        -> skip the kernel (result is zero),
//   min density >= 1/2   -> GEMM,
//   max density >= 2/P   -> SpDMM (X, the sparser one, as COO in BufferU),
//   otherwise            -> SPMM,
// streams the operands in, runs CLEAR + the primitive + STORE, and compares
// every stored element and the profiled non-zero count with a reference.
// Ports are the core's command/response/load/store streams.
module tb_cc_agent
  import dyn_pkg::*;
#(
  parameter int P  = 16,
  parameter int N1 = 32,
  parameter int ID = 0
) (
  input  logic     clk,
  input  logic     rst,
  output logic     cmd_valid,
  input  logic     cmd_ready,
  output cc_cmd_t  cmd,
  input  logic     rsp_valid,
  output logic     rsp_ready,
  input  cc_rsp_t  rsp,
  input  logic     irq_idle,
  output logic     ld_valid,
  input  logic     ld_ready,
  output ld_beat_t ld,
  input  logic     st_valid,
  output logic     st_ready,
  input  st_beat_t st
);
  int checks = 0, failures = 0;
  int n_gemm = 0, n_spdmm = 0, n_spmm = 0, n_skip = 0, n_tasks = 0, n_idle_irq = 0;
  bit done = 0;

  int X [N1][N1];
  int Y [N1][N1];
  int Z [N1][P];
  int G [N1][P];
  int mb [N1][N1];
  int got_rows = 0, rsp_cnt = 0;
  cc_rsp_t last_rsp;

  initial begin cmd_valid = 0; cmd = '0; ld_valid = 0; ld = '0; end
  assign rsp_ready = 1'b1;
  always @(posedge clk) begin
    st_ready <= ($urandom % 4) != 0;
    if (st_valid && st_ready) begin
      for (int k = 0; k < P; k++) G[st.row][k] = st.vals[k];
      got_rows++;
    end
    if (rsp_valid && rsp_ready) begin last_rsp = rsp; rsp_cnt++; end
    if (irq_idle) n_idle_irq++;
  end

  task automatic send(cc_cmd_t c);
    cmd <= c;
    cmd_valid <= 1'b1;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1;
    cmd_valid <= 1'b0;
  endtask

  function automatic cc_cmd_t mk(opcode_e op, int rows, int n = 0, int stride = 1, bit sp = 0);
    cc_cmd_t c;
    c = '0;
    c.op = op; c.rows = IDX_W'(rows); c.n = IDX_W'(n); c.stride = IDX_W'(stride);
    c.sparse = sp; c.barrier = 1'b1; c.agg = AGG_SUM; c.act = ACT_NONE;
    return c;
  endfunction

  task automatic stream(int rows, int cols, bit coo);
    int n, nb, r, cb;
    ld_beat_t b;
    nb = rows * (cols / P);
    for (int a = 0; a < nb; a++) begin
      r = a / (cols / P); cb = (a % (cols / P)) * P;
      b = '0; b.coo = coo; b.row = IDX_W'(r); b.colbase = IDX_W'(cb);
      n = 0;
      for (int p = 0; p < P; p++) begin
        if (!coo) b.vals[p] = mb[r][cb+p];
        else if (mb[r][cb+p] != 0) begin
          b.vals[n] = mb[r][cb+p]; b.cols[n] = ($clog2(P))'(p); n++;
        end
      end
      b.cnt = ($clog2(P+1))'(n);
      ld <= b;
      ld_valid <= 1'b1;
      @(negedge clk);
      while (!ld_ready) @(negedge clk);
      @(posedge clk); #1;
    end
    ld_valid <= 1'b0;
  endtask

  function automatic int rnd(int dens_pct);
    int v;
    if (($urandom % 100) >= dens_pct) return 0;
    v = int'($urandom % 15) - 7;
    return (v == 0) ? 2 : v;
  endfunction

  task automatic run_kernel(int m, int n, int dx, int dy);
    int nzx, nzy, bad, nz, rc;
    real ax, ay, amin, amax;
    opcode_e op;
    nzx = 0; nzy = 0;
    for (int r = 0; r < N1; r++) for (int c = 0; c < N1; c++) begin
      X[r][c] = (r < m && c < n) ? rnd(dx) : 0;
      Y[r][c] = (r < n && c < P) ? rnd(dy) : 0;
      nzx += (X[r][c] != 0); nzy += (Y[r][c] != 0);
    end
    ax = real'(nzx) / real'(m * n); ay = real'(nzy) / real'(n * P);
    amin = (ax < ay) ? ax : ay; amax = (ax > ay) ? ax : ay;
    if (amin == 0.0) begin n_skip++; return; end
    if (amin >= 0.5) op = OP_GEMM;
    else if (amax >= 2.0 / real'(P)) op = OP_SPDMM;
    else op = OP_SPMM;
    for (int r = 0; r < N1; r++) for (int k = 0; k < P; k++) begin
      Z[r][k] = 0;
      for (int i = 0; i < n; i++) Z[r][k] += X[r][i] * Y[i][k];
    end
    for (int r = 0; r < N1; r++) for (int c = 0; c < N1; c++) mb[r][c] = X[r][c];
    case (op)
      OP_GEMM:  begin send(mk(OP_LOAD_O, m * (n / P), 0, n / P)); stream(m, n, 0); n_gemm++; end
      OP_SPDMM: begin send(mk(OP_LOAD_U, m * (n / P))); stream(m, n, 1); n_spdmm++; end
      default:  begin send(mk(OP_LOAD_U, m * (n / P))); stream(m, n, 0); n_spmm++; end
    endcase
    for (int r = 0; r < N1; r++) for (int c = 0; c < N1; c++) mb[r][c] = (c < P) ? Y[r][c] : 0;
    case (op)
      OP_GEMM:  send(mk(OP_LOAD_P, n));
      OP_SPDMM: send(mk(OP_LOAD_O, n, 0, 1));
      default:  send(mk(OP_LOAD_O, n, 0, 1, 1));
    endcase
    stream(n, P, op == OP_SPMM);
    send(mk(OP_CLEAR, m));
    send(mk(op, m, n, (op == OP_GEMM) ? n / P : 1));
    got_rows = 0; rc = rsp_cnt;
    send(mk(OP_STORE, m));
    while (rsp_cnt == rc) @(posedge clk);
    bad = 0; nz = 0;
    for (int r = 0; r < m; r++) for (int k = 0; k < P; k++) begin
      checks++;
      nz += (Z[r][k] != 0);
      if (G[r][k] != Z[r][k]) begin
        if (bad < 3) $display("CC%0d %s: Z[%0d][%0d]=%0d expected %0d", ID, op.name(), r, k, G[r][k], Z[r][k]);
        bad++; failures++;
      end
    end
    checks++;
    if (got_rows != m || last_rsp.nnz != CNT_W'(nz) || last_rsp.total != CNT_W'(m * P)) begin
      failures++; $display("CC%0d %s: rows %0d nnz %0d/%0d", ID, op.name(), got_rows, last_rsp.nnz, nz);
    end
    n_tasks++;
  endtask

  initial begin
    int ok, m, n, dx, dy;
    @(negedge rst);
    repeat (3) @(posedge clk); #1;
    forever begin
      while (!irq_idle) @(posedge clk);
      tb_dynasparse_top.next_kernel(ok, m, n, dx, dy);
      if (!ok) break;
      run_kernel(m, n, dx, dy);
    end
    repeat (5) @(posedge clk);
    done = 1;
  end
endmodule

// Self-checking testbench of one Computation Core.
//
// Plays the soft processor and external memory: it builds random matrices,
// streams them in through the loader (dense and COO beats), issues GEMM,
// SpDMM (normal and transposed, column-region result), SPMM and mixed-mode
// accumulating tasks, stores the results and compares every element and the
// reported non-zero count with a reference product computed here.  It also
// loads one buffer half while the other is being computed (double
// buffering) and checks the GEMM cycle count m/P*(n+2P+2) of this design.
module tb_computation_core;
  import dyn_pkg::*;

  localparam int P  = 16;
  localparam int N1 = 64;
  localparam int H  = P / 2;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready;
  cc_cmd_t cmd;
  logic rsp_valid, rsp_ready;
  cc_rsp_t rsp;
  logic irq_idle;
  logic ld_valid = 0, ld_ready;
  ld_beat_t ld;
  logic st_valid, st_ready;
  st_beat_t st;

  computation_core #(.P(P), .N1(N1)) dut (.*);

  int checks = 0, failures = 0;
  bit verbose = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    #20000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // matrices
  int X [N1][N1];
  int Y [N1][N1];
  int Z [N1][P];      // reference
  int G [N1][P];      // stored result
  int got_rows;
  int mb [N1][N1];    // matrix to stream

  // store stream sink and response capture
  cc_rsp_t last_rsp;
  int      rsp_cnt = 0;
  assign rsp_ready = 1'b1;
  always @(posedge clk) begin
    st_ready <= ($urandom % 4) != 0;
    if (st_valid && st_ready) begin
      for (int k = 0; k < P; k++) G[st.row][k] = st.vals[k];
      got_rows++;
    end
    if (rsp_valid && rsp_ready) begin
      last_rsp = rsp;
      rsp_cnt++;
    end
  end

  task automatic send(cc_cmd_t c);
    cmd <= c;
    cmd_valid <= 1'b1;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1;
    cmd_valid <= 1'b0;
    if (verbose) $display("%0d: sent op %s", cyc, c.op.name());
  endtask

  function automatic cc_cmd_t mk(opcode_e op, bit set, int rows, int n = 0, int stride = 1,
                                 bit tr = 0, bit sp = 0, bit bar = 1, act_e act = ACT_NONE);
    cc_cmd_t c;
    c = '0;
    c.op = op; c.set = set; c.rows = IDX_W'(rows); c.n = IDX_W'(n); c.stride = IDX_W'(stride);
    c.transpose = tr; c.sparse = sp; c.barrier = bar; c.act = act; c.agg = AGG_SUM;
    return c;
  endfunction

  // Stream rows x cols of mb, P columns per beat; coo=1 sends compacted beats.
  // colmajor=1 sends the chunks column block by column block (LTU order).
  task automatic stream(int rows, int cols, bit coo, bit colmajor = 0);
    int r, cb, n, nb;
    ld_beat_t b;
    nb = rows * (cols / P);
    for (int a = 0; a < nb; a++) begin
        if (colmajor) begin r = a % rows; cb = (a / rows) * P; end
        else          begin r = a / (cols / P); cb = (a % (cols / P)) * P; end
        b = '0;
        b.coo = coo; b.row = IDX_W'(r); b.colbase = IDX_W'(cb);
        n = 0;
        for (int p = 0; p < P; p++) begin
          if (!coo) b.vals[p] = mb[r][cb+p];
          else if (mb[r][cb+p] != 0) begin
            b.vals[n] = mb[r][cb+p];
            b.cols[n] = ($clog2(P))'(p);
            n++;
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
    return (v == 0) ? 3 : v;
  endfunction

  task automatic gen(int m, int n, int dx, int dy);
    for (int r = 0; r < N1; r++) for (int c = 0; c < N1; c++) begin
      X[r][c] = (r < m && c < n) ? rnd(dx) : 0;
      Y[r][c] = (r < n && c < P) ? rnd(dy) : 0;
    end
  endtask

  task automatic ref_acc(int m, int n);
    for (int r = 0; r < m; r++) for (int k = 0; k < P; k++)
      for (int i = 0; i < n; i++) Z[r][k] += X[r][i] * Y[i][k];
  endtask

  task automatic ref_clear();
    for (int r = 0; r < N1; r++) for (int k = 0; k < P; k++) Z[r][k] = 0;
  endtask

  task automatic copy_x(int m, int n, bit transpose);
    for (int r = 0; r < N1; r++) for (int c = 0; c < N1; c++) mb[r][c] = 0;
    for (int r = 0; r < m; r++) for (int c = 0; c < n; c++)
      if (transpose) mb[c][r] = X[r][c]; else mb[r][c] = X[r][c];
  endtask
  task automatic copy_y(int n);
    for (int r = 0; r < N1; r++) for (int c = 0; c < N1; c++) mb[r][c] = (c < P) ? Y[r][c] : 0;
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (!(irq_idle && !dut.cp_busy && !dut.ld_busy && !dut.so_busy)) @(posedge clk);
  endtask

  task automatic store_check(string name, int m, bit set, bit tr = 0, act_e act = ACT_NONE);
    int bad, nz, rc;
    got_rows = 0;
    rc = rsp_cnt;
    send(mk(OP_STORE, set, m, 0, 1, tr, 0, 1, act));
    while (rsp_cnt == rc) @(posedge clk);
    bad = 0; nz = 0;
    for (int r = 0; r < m; r++) for (int k = 0; k < P; k++) begin
      int e;
      e = Z[r][k];
      if (act == ACT_RELU && e < 0) e = 0;
      if (e != 0) nz++;
      checks++;
      if (G[r][k] != e) begin
        if (bad < 4) $display("%s: Z[%0d][%0d] = %0d, expected %0d", name, r, k, G[r][k], e);
        bad++;
        failures++;
      end
    end
    checks++;
    if (got_rows != m) begin failures++; $display("%s: %0d rows stored, expected %0d", name, got_rows, m); end
    checks++;
    if (last_rsp.nnz != CNT_W'(nz) || last_rsp.total != CNT_W'(m*P)) begin
      failures++;
      $display("%s: profiler nnz=%0d total=%0d, expected %0d %0d", name, last_rsp.nnz, last_rsp.total, nz, m*P);
    end
    $display("%s: %0d mismatches, nnz %0d of %0d", name, bad, nz, m*P);
  endtask

  // Count the cycles a compute command keeps the compute unit busy.
  int t0, tcomp;
  task automatic compute(cc_cmd_t c);
    send(c);
    t0 = cyc;
    @(posedge clk);
    while (dut.cp_busy) @(posedge clk);
    tcomp = cyc - t0;
  endtask

  int m, n, nnz_u, sw0;

  initial begin
    cmd = '0; ld = '0;
    repeat (5) @(posedge clk);
    rst <= 0;
    @(posedge clk);

    // ---------------- GEMM ----------------
    m = 32; n = 48;
    gen(m, n, 90, 90);
    copy_x(m, n, 0); send(mk(OP_LOAD_O, 0, m * (n / P), 0, n / P)); stream(m, n, 0);
    copy_y(n);       send(mk(OP_LOAD_P, 0, n)); stream(n, P, 0);
    send(mk(OP_CLEAR, 0, m));
    ref_clear(); ref_acc(m, n);
    compute(mk(OP_GEMM, 0, m, n, n / P));
    checks++;
    if (tcomp > (m / P) * (n + 2 * P + 2) + 2) begin
      failures++; $display("GEMM took %0d cycles, expected <= %0d", tcomp, (m / P) * (n + 2 * P + 2) + 2);
    end
    $display("GEMM m=%0d n=%0d: %0d cycles (ideal m*n*P/P^2 = %0d)", m, n, tcomp, m * n / P);
    store_check("GEMM", m, 0, 0, ACT_RELU);

    // ---------------- SpDMM (X sparse in BufferU, COO beats) ----------------
    m = 48; n = 64;
    gen(m, n, 12, 80);
    copy_x(m, n, 0); send(mk(OP_LOAD_U, 1, m * (n / P))); stream(m, n, 1);
    copy_y(n);       send(mk(OP_LOAD_O, 1, n, 0, 1)); stream(n, P, 0);
    wait_idle();
    nnz_u = int'(dut.u_nnz[1]);
    send(mk(OP_CLEAR, 1, m));
    ref_clear(); ref_acc(m, n);
    sw0 = dut.stat_mode_switches;
    compute(mk(OP_SPDMM, 1, m));
    checks++;
    if (dut.stat_mode_switches != sw0 + 1) begin failures++; $display("no mode switch counted"); end
    $display("SpDMM nnz=%0d: %0d cycles (ideal nnz/(P/2) = %0d)", nnz_u, tcomp, nnz_u / H);
    checks++;
    if (tcomp < nnz_u / H) begin failures++; $display("SpDMM faster than P/2 elements per cycle"); end
    store_check("SpDMM", m, 1);

    // ---------------- SPMM (both sparse), with double buffering ----------------
    m = 32; n = 32;
    gen(m, n, 15, 25);
    copy_x(m, n, 0); send(mk(OP_LOAD_U, 0, m * (n / P))); stream(m, n, 0);
    copy_y(n);       send(mk(OP_LOAD_O, 0, n, 0, 1, 0, 1)); stream(n, P, 1);
    send(mk(OP_CLEAR, 0, m));
    ref_clear(); ref_acc(m, n);
    send(mk(OP_SPMM, 0, m));
    // load set 1 while set 0 computes: next task's X (dense, GEMM)
    begin
      int busy_seen;
      copy_x(m, n, 0);
      send(mk(OP_LOAD_O, 1, m * (n / P), 0, n / P, 0, 0, 0));
      busy_seen = dut.cp_busy;
      stream(m, n, 0);
      checks++;
      if (!busy_seen) begin failures++; $display("load did not overlap computation"); end
    end
    wait_idle();
    store_check("SPMM", m, 0);

    // ---------------- Transposed SpDMM: Z = X * Y with Y the sparse one ----------------
    m = 16; n = 64;
    gen(m, n, 85, 10);
    // BufferU gets Y^T (COO with row/col swapped); BufferO gets X^T through the LTU.
    copy_y(n); send(mk(OP_LOAD_U, 1, n, 0, 1, 1)); stream(n, P, 1);
    copy_x(m, n, 0); send(mk(OP_LOAD_O, 1, m * (n / P), 0, 1, 1)); stream(m, n, 0, 1);
    send(mk(OP_CLEAR, 1, m));
    ref_clear(); ref_acc(m, n);
    compute(mk(OP_SPDMM, 1, P, 0, 1, 1));
    store_check("SpDMM-T", m, 1, 1);

    // ---------------- One task, K = 2 steps in two different primitives ----------------
    m = 32; n = 32;
    ref_clear();
    send(mk(OP_CLEAR, 0, m));
    gen(m, n, 90, 90);
    copy_x(m, n, 0); send(mk(OP_LOAD_O, 0, m * (n / P), 0, n / P)); stream(m, n, 0);
    copy_y(n);       send(mk(OP_LOAD_P, 0, n)); stream(n, P, 0);
    ref_acc(m, n);
    compute(mk(OP_GEMM, 0, m, n, n / P));
    gen(m, n, 8, 30);
    copy_x(m, n, 0); send(mk(OP_LOAD_U, 0, m * (n / P))); stream(m, n, 1);
    copy_y(n);       send(mk(OP_LOAD_O, 0, n, 0, 1, 0, 1)); stream(n, P, 0);
    ref_acc(m, n);
    compute(mk(OP_SPMM, 0, m));
    store_check("GEMM+SPMM", m, 0);

    $display("mode switches: %0d", dut.stat_mode_switches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Computation Core (CC): one Agile Computation Module (ACM) plus its
// Auxiliary Hardware Module (AHM).
//
// A task multiplies Z += X * Y, X being m x n and Y being n x P (the width of
// a result row is one P-element word).  The soft processor drives the core
// with commands on a valid/ready stream (the paper uses AXI4-Stream); input
// partitions arrive on a load stream from external memory and results leave
// on a store stream.  Three units work concurrently so that the loading of
// the next task's operands and the storing of the previous result overlap
// the computation (double buffering: every buffer has two halves, `set`):
//
//  loader   LOAD_U / LOAD_O / LOAD_P.  Each beat goes through S2D (a COO
//           beat becomes a dense chunk), then either D2S (BufferU: COO
//           entries; BufferO sparse: packed sparse rows), the LTU (BufferP,
//           column-major Y for GEMM; BufferO transposed, X^T), or straight
//           into BufferO (dense, row-major).  Table 2 of the paper fixes which
//           buffer and format each mode reads.
//  compute  CLEAR, GEMM, SPDMM, SPMM on the shared ALU array.
//           GEMM: systolic, output stationary, one P x P block of Z at a time
//           (BufferO rows x BufferP columns), accumulated into the RB.
//           SpDMM: BufferU non-zeros e = X[j][i] are fetched P/2 per cycle,
//           the ISN routes each to BufferO bank i mod P, which reads Y[i];
//           the DSN routes (e, Y[i]) to Update Unit j mod P/2, and the Reduce
//           Unit updates Z[j] in the RB (row region, or with `transpose` the
//           column region that holds Z^T).  SPMM: same front end, BufferO
//           holds packed sparse rows, the DSN routes to SCP j mod P.
//           Changing the mode costs one cycle.
//  store    STORE: RB rows -> Layout Merger (row + column regions) ->
//           activation -> Sparsity Profiler -> store stream; the rows read are
//           cleared (the RB is initialised for the next task) and the count
//           of non-zeros is returned on the response stream.
//
// A command with `barrier` is only issued when the whole core is idle;
// otherwise a command is issued as soon as its unit is free.  irq_idle is the
// interrupt the paper's core raises to ask the soft processor for work.
// Sizes: m, n <= N1; GEMM needs m to be a multiple of P; transposed loads
// need the number of beats to be a multiple of P; a column-region result
// (SpDMM transpose) needs m <= P.  These limits are this design's; the paper
// gives no buffer depths (N1 = 256 is assumed).
module computation_core
  import dyn_pkg::*;
#(
  parameter int P       = P_SYS,
  parameter int N1      = N1_MAX,
  parameter int FIFO_D  = 4,
  parameter int PRELU_S = 2      // PReLU slope 2^-PRELU_S (assumed)
) (
  input  logic      clk,
  input  logic      rst,
  // control stream from the soft processor
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  cc_cmd_t   cmd,
  // sparsity information to the soft processor
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output cc_rsp_t   rsp,
  output logic      irq_idle,
  // external memory streams
  input  logic      ld_valid,
  output logic      ld_ready,
  input  ld_beat_t  ld,
  output logic      st_valid,
  input  logic      st_ready,
  output st_beat_t  st
);
  localparam int H    = P / 2;
  localparam int CW   = $clog2(P);
  localparam int RPB  = N1 / P;               // rows per bank
  localparam int UD   = N1 * N1 / P;          // BufferU entries per bank and set
  localparam int OD   = RPB * RPB;            // BufferO words per bank and set
  localparam int PD   = RPB;                  // BufferP words per bank and set
  localparam int UAW  = $clog2(2*UD);
  localparam int OAW  = $clog2(2*OD);
  localparam int PAW  = $clog2(2*PD);
  localparam int RAW  = $clog2(RPB);
  localparam int EW   = $clog2(N1*N1+1);     // entry counters of BufferU

  typedef logic [P-1:0][DATA_W-1:0] row_t;
  typedef struct packed { coo_t e; oword_t y; } pair_t;
  typedef struct packed { logic [IDX_W-1:0] row; logic [IDX_W-1:0] colbase; } sb_t;

  // ------------------------------------------------------------------
  // Command dispatch
  // ------------------------------------------------------------------
  logic    ld_busy, cp_busy, so_busy;
  cc_cmd_t ldc, cpc, soc;
  logic    is_ld, is_cp, is_so, can_issue;

  always_comb begin
    is_ld = cmd.op inside {OP_LOAD_U, OP_LOAD_O, OP_LOAD_P};
    is_so = (cmd.op == OP_STORE);
    is_cp = !is_ld && !is_so;
    can_issue = (!cmd.barrier || !(ld_busy || cp_busy || so_busy)) &&
                ((is_ld && !ld_busy) || (is_cp && !cp_busy) || (is_so && !so_busy));
    cmd_ready = can_issue;
  end
  assign irq_idle = !(ld_busy || cp_busy || so_busy) && !cmd_valid;

  // ------------------------------------------------------------------
  // Buffers
  // ------------------------------------------------------------------
  // BufferU: COO entries, entry e of a set in bank e mod P, word e / P.
  logic [P-1:0]   u_we, u_re;
  logic [UAW-1:0] u_wa [P], u_ra [P];
  coo_t           u_wd [P], u_rd [P];
  // BufferO: row r in bank r mod P; dense word (r/P)*stride + c/P; sparse word r/P.
  logic [P-1:0]   o_we, o_re;
  logic [OAW-1:0] o_wa [P], o_ra [P];
  oword_t         o_wd [P], o_rd [P];
  // BufferP: column c of Y in bank c, word k/P.
  logic [P-1:0]   p_we, p_re;
  logic [PAW-1:0] p_wa [P], p_ra [P];
  row_t           p_wd [P], p_rd [P];

  for (genvar b = 0; b < P; b++) begin : g_bank
    bank_ram #(.DEPTH(2*UD), .T(coo_t)) u_bufu (
      .clk, .we(u_we[b]), .waddr(u_wa[b]), .wdata(u_wd[b]),
      .re(u_re[b]), .raddr(u_ra[b]), .rdata(u_rd[b]));
    bank_ram #(.DEPTH(2*OD), .T(oword_t)) u_bufo (
      .clk, .we(o_we[b]), .waddr(o_wa[b]), .wdata(o_wd[b]),
      .re(o_re[b]), .raddr(o_ra[b]), .rdata(o_rd[b]));
    bank_ram #(.DEPTH(2*PD), .T(row_t)) u_bufp (
      .clk, .we(p_we[b]), .waddr(p_wa[b]), .wdata(p_wd[b]),
      .re(p_re[b]), .raddr(p_ra[b]), .rdata(p_rd[b]));
  end

  // Result Buffer: rb[set][bank][word], row j in bank j mod P, word j / P,
  // asynchronous read for the single-cycle read-modify-write of the Reduce
  // Units.  rbc[set][k] is the column region (row k of Z^T).
  row_t rb  [2][P][RPB];
  row_t rbc [2][P];

  logic [EW-1:0]  u_nnz [2];     // entries loaded into each BufferU half

  // ------------------------------------------------------------------
  // Loader
  // ------------------------------------------------------------------
  logic [IDX_W-1:0] ld_in_cnt, ld_out_cnt;
  logic [EW-1:0]    u_wp;
  logic             ld_take;

  // S2D: a COO beat is expanded; a dense beat passes with identity columns.
  logic [P-1:0][CW-1:0] id_cols;
  always_comb for (int p = 0; p < P; p++) id_cols[p] = CW'(p);

  logic  s2d_v;
  row_t  s2d_vals;
  sb_t   s2d_sb;
  s2d #(.N(P), .W(DATA_W), .SB(sb_t)) u_s2d (
    .clk, .rst, .in_valid(ld_take), .in_vals(ld.vals),
    .in_cols(ld.coo ? ld.cols : id_cols),
    .in_cnt(ld.coo ? ld.cnt : ($clog2(P+1))'(P)),
    .in_sb('{row: ld.row, colbase: ld.colbase}),
    .out_valid(s2d_v), .out_vals(s2d_vals), .out_sb(s2d_sb));

  logic use_ltu, use_d2s;
  assign use_ltu = (ldc.op == OP_LOAD_P) || (ldc.op == OP_LOAD_O && ldc.transpose);
  assign use_d2s = (ldc.op == OP_LOAD_U) || (ldc.op == OP_LOAD_O && ldc.sparse && !ldc.transpose);

  logic                 d2s_v;
  row_t                 d2s_vals;
  logic [P-1:0][CW-1:0] d2s_cols;
  logic [$clog2(P+1)-1:0] d2s_cnt;
  sb_t                  d2s_sb;
  d2s #(.N(P), .W(DATA_W), .SB(sb_t)) u_d2s (
    .clk, .rst, .in_valid(s2d_v && use_d2s), .in_vals(s2d_vals), .in_sb(s2d_sb),
    .out_valid(d2s_v), .out_vals(d2s_vals), .out_cols(d2s_cols), .out_cnt(d2s_cnt),
    .out_sb(d2s_sb));

  logic        ltu_rdy, ltu_v;
  logic [CW-1:0] ltu_idx;
  row_t        ltu_vals;
  sb_t         ltu_sb;
  ltu #(.N(P), .W(DATA_W), .SB(sb_t)) u_ltu (
    .clk, .rst, .in_valid(s2d_v && use_ltu), .in_ready(ltu_rdy), .in_vals(s2d_vals),
    .in_sb(s2d_sb), .out_valid(ltu_v), .out_idx(ltu_idx), .out_vals(ltu_vals),
    .out_sb(ltu_sb));

  assign ld_ready = ld_busy && (ld_in_cnt < ldc.rows);
  assign ld_take  = ld_valid && ld_ready;

  // Write side of the loader into the buffers (combinational decode).
  logic ld_wr_done;          // one output beat/column written this cycle
  always_comb begin
    u_we = '0; o_we = '0; p_we = '0;
    ld_wr_done = 1'b0;
    for (int b = 0; b < P; b++) begin
      u_wa[b] = '0; u_wd[b] = '0;
      o_wa[b] = '0; o_wd[b] = '0;
      p_wa[b] = '0; p_wd[b] = '0;
    end
    if (ld_busy) begin
      if (use_d2s && d2s_v) begin
        ld_wr_done = 1'b1;
        if (ldc.op == OP_LOAD_U) begin
          for (int k = 0; k < P; k++) begin
            automatic logic [EW-1:0]  ei = u_wp + EW'(k);
            automatic int             bk = int'(ei[CW-1:0]);
            automatic coo_t           ce;
            ce.row = d2s_sb.row;
            ce.col = d2s_sb.colbase + IDX_W'(d2s_cols[k]);
            ce.val = data_t'(d2s_vals[k]);
            if (ldc.transpose) begin
              ce.row = d2s_sb.colbase + IDX_W'(d2s_cols[k]);
              ce.col = d2s_sb.row;
            end
            if (k < int'(d2s_cnt)) begin
              u_we[bk] = 1'b1;
              u_wa[bk] = {ldc.set, (UAW-1)'(ei >> CW)};
              u_wd[bk] = ce;
            end
          end
        end else begin                        // packed sparse row of Y
          automatic int bk = int'(d2s_sb.row[CW-1:0]);
          o_we[bk] = 1'b1;
          o_wa[bk] = {ldc.set, (OAW-1)'(d2s_sb.row >> CW)};
          o_wd[bk] = '{nnz: d2s_cnt, cols: d2s_cols, vals: d2s_vals};
        end
      end
      if (!use_d2s && !use_ltu && s2d_v) begin  // dense BufferO row chunk
        automatic int bk = int'(s2d_sb.row[CW-1:0]);
        ld_wr_done = 1'b1;
        o_we[bk] = 1'b1;
        o_wa[bk] = {ldc.set, (OAW-1)'((s2d_sb.row >> CW) * ldc.stride + (s2d_sb.colbase >> CW))};
        o_wd[bk] = '{nnz: ($clog2(P+1))'(P), cols: id_cols, vals: s2d_vals};
      end
      if (use_ltu && ltu_v) begin
        automatic logic [IDX_W-1:0] t = ltu_sb.colbase + IDX_W'(ltu_idx);  // column index
        automatic int bk = int'(t[CW-1:0]);
        ld_wr_done = 1'b1;
        if (ldc.op == OP_LOAD_P) begin
          p_we[bk] = 1'b1;
          p_wa[bk] = {ldc.set, (PAW-1)'(ltu_sb.row >> CW)};
          p_wd[bk] = ltu_vals;
        end else begin                          // X^T row t into BufferO
          o_we[bk] = 1'b1;
          o_wa[bk] = {ldc.set, (OAW-1)'((t >> CW) * ldc.stride + (ltu_sb.row >> CW))};
          o_wd[bk] = '{nnz: ($clog2(P+1))'(P), cols: id_cols, vals: ltu_vals};
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ld_busy <= 1'b0;
      ld_in_cnt <= '0; ld_out_cnt <= '0; u_wp <= '0;
      u_nnz[0] <= '0; u_nnz[1] <= '0;
      ldc <= '0;
    end else if (!ld_busy) begin
      if (cmd_valid && cmd_ready && is_ld) begin
        ld_busy <= 1'b1;
        ldc <= cmd;
        ld_in_cnt <= '0; ld_out_cnt <= '0; u_wp <= '0;
      end
    end else begin
      if (ld_take) ld_in_cnt <= ld_in_cnt + 1'b1;
      if (ld_wr_done) ld_out_cnt <= ld_out_cnt + 1'b1;
      if (ldc.op == OP_LOAD_U && d2s_v) u_wp <= u_wp + EW'(d2s_cnt);
      if (ld_out_cnt + IDX_W'(ld_wr_done) == ldc.rows) begin
        ld_busy <= 1'b0;
        if (ldc.op == OP_LOAD_U)
          u_nnz[ldc.set] <= u_wp + EW'(d2s_v ? d2s_cnt : '0);
      end
    end
  end

  a_ltu_never_full: assert property (@(posedge clk) disable iff (rst) (s2d_v && use_ltu) |-> ltu_rdy);

  // ------------------------------------------------------------------
  // ALU array
  // ------------------------------------------------------------------
  mode_e mode_q;
  logic  gemm_en, gemm_clr;
  data_t gemm_a [P], gemm_b [P], gemm_acc [P][P];
  logic [H-1:0] upd_en;
  data_t upd_val [H], upd_y [H][P], upd_u [H][P], red_z [H][P], red_out [H][P];
  logic [P-1:0] scp_mul_en;
  data_t scp_a [P], scp_b [P], scp_prod [P], scp_ma [P], scp_mb [P], scp_merge [P];

  alu_array #(.P(P)) u_array (
    .clk, .rst, .mode(mode_q), .agg(cpc.agg),
    .gemm_en, .gemm_clr, .gemm_a, .gemm_b, .gemm_acc,
    .upd_en, .upd_val, .upd_y, .upd_u, .red_z, .red_out,
    .scp_mul_en, .scp_a, .scp_b, .scp_prod, .scp_ma, .scp_mb, .scp_merge);

  // ------------------------------------------------------------------
  // Compute unit
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    C_IDLE, C_SWITCH, C_CLEAR, G_CLR, G_RUN, G_WB, S_RUN, S_FLUSH
  } cstate_e;
  cstate_e cs;
  logic [IDX_W-1:0] c_cnt;      // GEMM: row block / CLEAR: word
  logic [IDX_W:0]   g_t;        // GEMM: cycle within a block
  logic [IDX_W-1:0] g_kd;       // GEMM: k of the data returning from the buffers
  logic             g_kv;
  logic [EW-1:0]    s_grp;      // next BufferU group of P/2 entries
  logic [EW-1:0]    s_done;     // entries finished by the back end
  logic             s_par;      // parity of the group held in BufferU's read registers
  logic [H-1:0]     fv;         // ISN input registers valid
  logic [31:0]      stat_mode_switches;

  mode_e  cmd_mode;
  always_comb
    unique case (cmd.op)
      OP_SPDMM: cmd_mode = MODE_SPDMM;
      OP_SPMM:  cmd_mode = MODE_SPMM;
      default:  cmd_mode = MODE_GEMM;
    endcase

  // ISN / DSN
  logic [P-1:0]         isn_iv, isn_ir, isn_ov, isn_or;
  logic [P-1:0][CW-1:0] isn_id;
  coo_t                 isn_idat [P], isn_odat [P];
  logic [P-1:0]         dsn_iv, dsn_ir, dsn_ov, dsn_or;
  logic [P-1:0][CW-1:0] dsn_id;
  pair_t                dsn_idat [P], dsn_odat [P];

  shuffle_network #(.N(P), .T(coo_t)) u_isn (
    .clk, .rst, .in_valid(isn_iv), .in_ready(isn_ir), .in_dest(isn_id), .in_data(isn_idat),
    .out_valid(isn_ov), .out_ready(isn_or), .out_data(isn_odat));
  shuffle_network #(.N(P), .T(pair_t)) u_dsn (
    .clk, .rst, .in_valid(dsn_iv), .in_ready(dsn_ir), .in_dest(dsn_id), .in_data(dsn_idat),
    .out_valid(dsn_ov), .out_ready(dsn_or), .out_data(dsn_odat));

  // BufferO read stage of the sparse modes
  logic [P-1:0] sv;
  coo_t         se [P];

  logic [EW-1:0]  s_ngrp;
  logic           s_all_free, s_fetch;
  assign s_ngrp     = (u_nnz[cpc.set] + EW'(H-1)) >> $clog2(H);
  assign s_all_free = &(~fv | isn_ir[H-1:0]);
  assign s_fetch    = (cs == S_RUN) && s_all_free && (s_grp < s_ngrp);

  // Update Units' registered row index and valid (the Reduce stage)
  logic [H-1:0]     rv;
  logic [IDX_W-1:0] rj [H];

  // SCPs
  logic [P-1:0] scp_in_rdy, scp_pop, scp_busy, scp_we, scp_sw;
  logic [IDX_W-1:0] scp_rrow [P], scp_wrow [P];
  row_t scp_rdata [P], scp_wdata [P];
  logic scp_start, scp_flush;

  for (genvar s = 0; s < P; s++) begin : g_scp
    scp #(.P(P), .FIFO_D(FIFO_D)) u_scp (
      .clk, .rst, .start(scp_start), .flush(scp_flush),
      .in_valid(dsn_ov[s] && mode_q == MODE_SPMM && cs == S_RUN), .in_ready(scp_in_rdy[s]),
      .in_e(dsn_odat[s].e), .in_y(dsn_odat[s].y),
      .mul_en(scp_mul_en[s]), .mul_a(scp_a[s]), .mul_b(scp_b[s]), .prod(scp_prod[s]),
      .merge_a(scp_ma[s]), .merge_b(scp_mb[s]), .merge_y(scp_merge[s]),
      .rb_rrow(scp_rrow[s]), .rb_rdata(scp_rdata[s]),
      .rb_we(scp_we[s]), .rb_wrow(scp_wrow[s]), .rb_wdata(scp_wdata[s]),
      .pop(scp_pop[s]), .busy(scp_busy[s]), .row_switch(scp_sw[s]));
    assign scp_rdata[s] = rb[cpc.set][s][scp_rrow[s][CW +: RAW]];
  end

  logic [$clog2(P+1)-1:0] n_fin;   // entries finished this cycle
  always_comb begin
    n_fin = '0;
    if (mode_q == MODE_SPDMM) begin
      for (int u = 0; u < H; u++) n_fin += ($clog2(P+1))'(rv[u]);
    end else begin
      for (int s = 0; s < P; s++) n_fin += ($clog2(P+1))'(scp_pop[s]);
    end
  end

  always_comb begin
    // defaults
    gemm_en = 1'b0; gemm_clr = 1'b0;
    o_re = '0; p_re = '0; u_re = '0;
    for (int b = 0; b < P; b++) begin
      o_ra[b] = '0; p_ra[b] = '0; u_ra[b] = '0;
      gemm_a[b] = '0; gemm_b[b] = '0;
    end
    // GEMM operand reads: X[rb*P + r][k] from BufferO bank r, Y[k][c] from BufferP bank c
    if (cs == G_RUN && g_t < (IDX_W+1)'(cpc.n)) begin
      for (int b = 0; b < P; b++) begin
        o_re[b] = 1'b1;
        o_ra[b] = {cpc.set, (OAW-1)'(c_cnt * cpc.stride + (g_t[IDX_W-1:0] >> CW))};
        p_re[b] = 1'b1;
        p_ra[b] = {cpc.set, (PAW-1)'(g_t[IDX_W-1:0] >> CW)};
      end
    end
    gemm_en  = (cs == G_RUN) && (g_t != '0);
    gemm_clr = (cs == G_CLR);
    if (g_kv) begin
      for (int b = 0; b < P; b++) begin
        gemm_a[b] = data_t'(o_rd[b].vals[g_kd[CW-1:0]]);
        gemm_b[b] = data_t'(p_rd[b][g_kd[CW-1:0]]);
      end
    end
    // Sparse modes: BufferU fetch, P/2 entries of group s_grp
    if (s_fetch) begin
      for (int q = 0; q < H; q++) begin
        automatic int bk = int'(s_grp[0]) * H + q;
        u_re[bk] = 1'b1;
        u_ra[bk] = {cpc.set, (UAW-1)'(s_grp >> 1)};
      end
    end
    // ISN inputs
    for (int p = 0; p < P; p++) begin
      isn_iv[p] = 1'b0; isn_id[p] = '0; isn_idat[p] = '0;
    end
    for (int q = 0; q < H; q++) begin
      automatic coo_t e = u_rd[int'(s_par) * H + q];
      isn_iv[q]   = fv[q];
      isn_idat[q] = e;
      isn_id[q]   = e.col[CW-1:0];
    end
    // BufferO read stage fed by the ISN, feeding the DSN
    for (int b = 0; b < P; b++) begin
      isn_or[b] = !sv[b] || dsn_ir[b];
      if (isn_ov[b] && isn_or[b] && cs == S_RUN) begin
        o_re[b] = 1'b1;
        o_ra[b] = {cpc.set, (OAW-1)'((isn_odat[b].col >> CW) * cpc.stride)};
      end
      dsn_iv[b]   = sv[b];
      dsn_idat[b] = '{e: se[b], y: o_rd[b]};
      dsn_id[b]   = (mode_q == MODE_SPDMM) ? CW'(se[b].row % H) : se[b].row[CW-1:0];
    end
    // DSN outputs: Update Units (SpDMM) or SCPs (SPMM)
    for (int p = 0; p < P; p++)
      dsn_or[p] = (mode_q == MODE_SPDMM) ? (p < H) : scp_in_rdy[p];
    for (int u = 0; u < H; u++) begin
      upd_en[u]  = (mode_q == MODE_SPDMM) && dsn_ov[u];
      upd_val[u] = dsn_odat[u].e.val;
      for (int k = 0; k < P; k++) begin
        upd_y[u][k] = data_t'(dsn_odat[u].y.vals[k]);
        red_z[u][k] = cpc.transpose ? data_t'(rbc[cpc.set][rj[u][CW-1:0]][k])
                                    : data_t'(rb[cpc.set][rj[u][CW-1:0]][rj[u][CW +: RAW]][k]);
      end
    end
    scp_start = (cs == C_SWITCH) || (cs == C_IDLE);
    scp_flush = (cs == S_FLUSH);
  end

  // Store unit signals used in the RB write block
  logic             so_rd;
  logic [IDX_W-1:0] so_row;
  logic             so_clr_col;

  always_ff @(posedge clk) begin
    if (rst) begin
      cs <= C_IDLE; cp_busy <= 1'b0; cpc <= '0; mode_q <= MODE_GEMM;
      c_cnt <= '0; g_t <= '0; g_kd <= '0; g_kv <= 1'b0;
      s_grp <= '0; s_done <= '0; s_par <= 1'b0; fv <= '0; sv <= '0; rv <= '0;
      stat_mode_switches <= '0;
    end else begin
      // BufferO read stage of the sparse modes
      for (int b = 0; b < P; b++) begin
        if (isn_or[b]) begin
          sv[b] <= isn_ov[b] && cs == S_RUN;
          se[b] <= isn_odat[b];
        end
      end
      // Update -> Reduce stage
      for (int u = 0; u < H; u++) begin
        rv[u] <= upd_en[u];
        rj[u] <= dsn_odat[u].e.row;
      end
      g_kv <= (cs == G_RUN) && (g_t < (IDX_W+1)'(cpc.n));
      g_kd <= g_t[IDX_W-1:0];

      unique case (cs)
        C_IDLE: if (cmd_valid && cmd_ready && is_cp) begin
          cpc <= cmd; cp_busy <= 1'b1; c_cnt <= '0;
          if (cmd.op != OP_CLEAR && cmd_mode != mode_q) begin
            mode_q <= cmd_mode;                // one cycle for the mode switch
            stat_mode_switches <= stat_mode_switches + 1;
            cs <= C_SWITCH;
          end else begin
            unique case (cmd.op)
              OP_CLEAR: cs <= C_CLEAR;
              OP_GEMM:  cs <= G_CLR;
              default:  cs <= S_RUN;
            endcase
          end
          s_grp <= '0; s_done <= '0; fv <= '0;
        end
        C_SWITCH: cs <= (cpc.op == OP_GEMM) ? G_CLR : S_RUN;
        C_CLEAR: begin
          c_cnt <= c_cnt + 1'b1;
          if ((c_cnt + 1'b1) * IDX_W'(P) >= cpc.rows) begin
            cs <= C_IDLE; cp_busy <= 1'b0;
          end
        end
        G_CLR: begin
          g_t <= '0;
          cs  <= G_RUN;
        end
        G_RUN: begin
          g_t <= g_t + 1'b1;
          if (g_t == (IDX_W+1)'(cpc.n) + (IDX_W+1)'(2*P - 1)) cs <= G_WB;
        end
        G_WB: begin
          c_cnt <= c_cnt + 1'b1;
          if ((c_cnt + 1'b1) * IDX_W'(P) >= cpc.rows) begin
            cs <= C_IDLE; cp_busy <= 1'b0;
          end else cs <= G_CLR;
        end
        S_RUN: begin
          if (s_all_free) begin
            if (s_fetch) begin
              for (int q = 0; q < H; q++)
                fv[q] <= ((s_grp * EW'(H) + EW'(q)) < u_nnz[cpc.set]);
              s_par <= s_grp[0];
              s_grp <= s_grp + 1'b1;
            end else fv <= '0;
          end else begin
            // partial acceptance: drop the entries the ISN took
            for (int q = 0; q < H; q++) if (isn_ir[q]) fv[q] <= 1'b0;
          end
          s_done <= s_done + EW'(n_fin);
          if (s_done + EW'(n_fin) == u_nnz[cpc.set] && !(|scp_busy)) begin
            if (mode_q == MODE_SPMM) cs <= S_FLUSH;
            else begin cs <= C_IDLE; cp_busy <= 1'b0; end
          end
        end
        S_FLUSH: begin
          cs <= C_IDLE; cp_busy <= 1'b0;
        end
        default: cs <= C_IDLE;
      endcase
    end
  end

  // Result Buffer writes: CLEAR, GEMM write-back, Reduce Units, SCPs, store clear.
  always_ff @(posedge clk) begin
    if (cs == C_CLEAR) begin
      for (int b = 0; b < P; b++) rb[cpc.set][b][c_cnt[RAW-1:0]] <= '0;
      if (c_cnt == '0) for (int k = 0; k < P; k++) rbc[cpc.set][k] <= '0;
    end
    if (cs == G_WB) begin
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++)
          rb[cpc.set][r][c_cnt[RAW-1:0]][c] <= rb[cpc.set][r][c_cnt[RAW-1:0]][c] + gemm_acc[r][c];
    end
    if (mode_q == MODE_SPDMM) begin
      for (int u = 0; u < H; u++)
        if (rv[u]) begin
          for (int k = 0; k < P; k++)
            if (cpc.transpose) rbc[cpc.set][rj[u][CW-1:0]][k] <= red_out[u][k];
            else               rb[cpc.set][rj[u][CW-1:0]][rj[u][CW +: RAW]][k] <= red_out[u][k];
        end
    end
    for (int s = 0; s < P; s++)
      if (scp_we[s]) rb[cpc.set][s][scp_wrow[s][CW +: RAW]] <= scp_wdata[s];
    if (so_rd) rb[soc.set][so_row[CW-1:0]][so_row[CW +: RAW]] <= '0;
    if (so_clr_col) for (int k = 0; k < P; k++) rbc[soc.set][k] <= '0;
  end

  // ------------------------------------------------------------------
  // Store unit: Layout Merger -> activation -> Sparsity Profiler
  // ------------------------------------------------------------------
  logic [IDX_W-1:0] so_next;
  logic             lm_v;
  logic [IDX_W-1:0] lm_row;
  row_t             lm_word, act_word;
  logic             sp_busy;
  logic [CNT_W-1:0] sp_nnz, sp_total;
  logic             so_rsp;
  logic             so_clr;

  // output queue
  st_beat_t oq [4];
  logic [1:0] oq_rp, oq_wp;
  logic [2:0] oq_cnt;

  assign so_rd  = so_busy && !so_rsp && (so_next < soc.rows) && (oq_cnt + 3'(lm_v) < 3'd3);
  assign so_row = so_next;
  assign so_clr_col = so_busy && so_rsp && rsp_valid && rsp_ready;

  layout_merger #(.N(P)) u_lm (
    .clk, .rst, .in_valid(so_rd), .in_row(so_row),
    .row_word(rb[soc.set][so_row[CW-1:0]][so_row[CW +: RAW]]),
    .col_en(soc.transpose), .colreg(rbc[soc.set]), .agg(soc.agg),
    .out_valid(lm_v), .out_row(lm_row), .out_word(lm_word));

  always_comb
    for (int k = 0; k < P; k++) begin
      automatic data_t x = data_t'(lm_word[k]);
      unique case (soc.act)
        ACT_RELU:  act_word[k] = (x < 0) ? '0 : x;
        ACT_PRELU: act_word[k] = (x < 0) ? (x >>> PRELU_S) : x;
        default:   act_word[k] = x;
      endcase
    end

  assign so_clr = !so_busy && cmd_valid && cmd_ready && is_so;
  sparsity_profiler #(.N(P), .W(DATA_W), .CW(CNT_W)) u_sp (
    .clk, .rst, .clr(so_clr), .in_valid(lm_v), .in_vals(act_word),
    .nnz(sp_nnz), .total(sp_total), .busy(sp_busy));

  assign st_valid  = (oq_cnt != '0);
  assign st        = oq[oq_rp];
  assign rsp_valid = so_busy && so_rsp;
  assign rsp       = '{nnz: sp_nnz, total: sp_total};

  always_ff @(posedge clk) begin
    if (rst) begin
      so_busy <= 1'b0; so_rsp <= 1'b0; so_next <= '0; soc <= '0;
      oq_rp <= '0; oq_wp <= '0; oq_cnt <= '0;
    end else begin
      if (lm_v) begin
        oq[oq_wp] <= '{row: lm_row, vals: act_word};
        oq_wp <= oq_wp + 1'b1;
      end
      if (st_valid && st_ready) oq_rp <= oq_rp + 1'b1;
      oq_cnt <= oq_cnt + 3'(lm_v) - 3'(st_valid && st_ready);
      if (so_clr) begin
        so_busy <= 1'b1; soc <= cmd; so_next <= '0; so_rsp <= 1'b0;
      end else if (so_busy) begin
        if (so_rd) so_next <= so_next + 1'b1;
        if (!so_rsp && so_next == soc.rows && !lm_v && !sp_busy && oq_cnt == '0)
          so_rsp <= 1'b1;
        if (so_rsp && rsp_ready) begin
          so_busy <= 1'b0; so_rsp <= 1'b0;
        end
      end
    end
  end

  a_oq_no_overflow: assert property (@(posedge clk) disable iff (rst) oq_cnt <= 3'd4);
endmodule

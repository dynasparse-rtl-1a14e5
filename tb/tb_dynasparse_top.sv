// End-to-end testbench of dynasparse_top with two Computation Cores.
// The scheduler here hands kernels to whichever core's agent (tb_cc_agent)
// asks first, as the runtime's dynamic scheduler does on the idle interrupt;
// the agents apply the K2P rule and check every result.  Kernel densities
// are chosen so that each of GEMM, SpDMM, SPMM and skip is selected.  The
// bench counts each mechanism and fails if one never happened: every
// primitive, a skip, mode switches in the cores, ISN/DSN back-pressure
// stalls, SCP row switches, work spread over both cores, idle interrupts.
module tb_dynasparse_top;
  import dyn_pkg::*;
  localparam int NCC = 2, P = 16, N1 = 32, NK = 10;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic     cmd_valid [NCC], cmd_ready [NCC], rsp_valid [NCC], rsp_ready [NCC], irq_idle [NCC];
  logic     ld_valid [NCC], ld_ready [NCC], st_valid [NCC], st_ready [NCC];
  cc_cmd_t  cmd [NCC];
  cc_rsp_t  rsp [NCC];
  ld_beat_t ld [NCC];
  st_beat_t st [NCC];

  dynasparse_top #(.NCC(NCC), .P(P), .N1(N1)) dut (.*);

  for (genvar i = 0; i < NCC; i++) begin : g_ag
    tb_cc_agent #(.P(P), .N1(N1), .ID(i)) u_ag (
      .clk, .rst,
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd(cmd[i]),
      .rsp_valid(rsp_valid[i]), .rsp_ready(rsp_ready[i]), .rsp(rsp[i]),
      .irq_idle(irq_idle[i]),
      .ld_valid(ld_valid[i]), .ld_ready(ld_ready[i]), .ld(ld[i]),
      .st_valid(st_valid[i]), .st_ready(st_ready[i]), .st(st[i]));
  end

  int checks = 0, failures = 0;
  int kidx = 0;
  // kernel list: {m, n, density of X %, density of Y %}
  int km [NK] = '{32, 32, 16, 32, 32, 16, 32, 32, 16, 32};
  int kn [NK] = '{32, 32, 32, 32, 32, 32, 32, 32, 32, 32};
  int kx [NK] = '{90,  8,  5, 80,  0, 10,  4, 95, 12,  6};
  int ky [NK] = '{80, 70,  5, 90, 50, 60,  5, 60, 40,  4};

  task automatic next_kernel(output int ok, output int m, output int n, output int dx, output int dy);
    if (kidx >= NK) begin ok = 0; m = 0; n = 0; dx = 0; dy = 0; return; end
    ok = 1; m = km[kidx]; n = kn[kidx]; dx = kx[kidx]; dy = ky[kidx];
    kidx++;
  endtask

  int isn_stall = 0, dsn_stall = 0, row_sw = 0;
  always @(posedge clk) if (!rst) begin
    if (|(dut.g_cc[0].u_cc.isn_iv & ~dut.g_cc[0].u_cc.isn_ir)) isn_stall++;
    if (|(dut.g_cc[1].u_cc.isn_iv & ~dut.g_cc[1].u_cc.isn_ir)) isn_stall++;
    if (|(dut.g_cc[0].u_cc.dsn_iv & ~dut.g_cc[0].u_cc.dsn_ir)) dsn_stall++;
    if (|(dut.g_cc[1].u_cc.dsn_iv & ~dut.g_cc[1].u_cc.dsn_ir)) dsn_stall++;
  end

  for (genvar s = 0; s < P; s++) begin : g_rs
    always @(posedge clk) if (!rst) begin
      if (dut.g_cc[0].u_cc.g_scp[s].u_scp.row_switch) row_sw++;
      if (dut.g_cc[1].u_cc.g_scp[s].u_scp.row_switch) row_sw++;
    end
  end

  initial begin
    #50000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(string what, int cnt);
    checks++;
    $display("  %-26s %0d", what, cnt);
    if (cnt == 0) begin failures++; $display("  mechanism never happened: %s", what); end
  endtask

  initial begin
    for (int i = 0; i < NCC; i++) begin
      cmd_valid[i] = 0; rsp_ready[i] = 0; ld_valid[i] = 0; st_ready[i] = 0;
    end
    repeat (5) @(posedge clk);
    rst <= 0;
    wait (g_ag[0].u_ag.done && g_ag[1].u_ag.done);
    checks += g_ag[0].u_ag.checks + g_ag[1].u_ag.checks;
    failures += g_ag[0].u_ag.failures + g_ag[1].u_ag.failures;
    $display("mechanisms:");
    need("GEMM kernels", g_ag[0].u_ag.n_gemm + g_ag[1].u_ag.n_gemm);
    need("SpDMM kernels", g_ag[0].u_ag.n_spdmm + g_ag[1].u_ag.n_spdmm);
    need("SPMM kernels", g_ag[0].u_ag.n_spmm + g_ag[1].u_ag.n_spmm);
    need("skipped kernels", g_ag[0].u_ag.n_skip + g_ag[1].u_ag.n_skip);
    need("mode switches", int'(dut.g_cc[0].u_cc.stat_mode_switches + dut.g_cc[1].u_cc.stat_mode_switches));
    need("ISN stall cycles", isn_stall);
    need("DSN stall cycles", dsn_stall);
    need("SCP row switches", row_sw);
    need("kernels on CC0", g_ag[0].u_ag.n_tasks);
    need("kernels on CC1", g_ag[1].u_ag.n_tasks);
    need("idle interrupt cycles", g_ag[0].u_ag.n_idle_irq + g_ag[1].u_ag.n_idle_irq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

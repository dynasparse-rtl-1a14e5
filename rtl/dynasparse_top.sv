// Accelerator top level: N_CC Computation Cores side by side.
//
// The device of the paper carries seven Computation Cores (two per Super
// Logic Region except the one holding the FPGA shell and the soft
// processor).  The cores share nothing: each has its own control stream from
// the soft processor, its own sparsity-information response stream, its own
// idle interrupt (used by the soft processor's dynamic task scheduler) and
// its own load and store streams to external memory.  The soft processor,
// the shell and the DDR controllers are not part of this RTL; their
// connections are the ports below, one array element per core.
//
// Timing: all cores run on one clock (the paper's cores run at 250 MHz) with
// a synchronous active-high reset.
module dynasparse_top
  import dyn_pkg::*;
#(
  parameter int NCC = N_CC,
  parameter int P   = P_SYS,
  parameter int N1  = N1_MAX
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     cmd_valid [NCC],
  output logic     cmd_ready [NCC],
  input  cc_cmd_t  cmd       [NCC],
  output logic     rsp_valid [NCC],
  input  logic     rsp_ready [NCC],
  output cc_rsp_t  rsp       [NCC],
  output logic     irq_idle  [NCC],
  input  logic     ld_valid  [NCC],
  output logic     ld_ready  [NCC],
  input  ld_beat_t ld        [NCC],
  output logic     st_valid  [NCC],
  input  logic     st_ready  [NCC],
  output st_beat_t st        [NCC]
);
  for (genvar i = 0; i < NCC; i++) begin : g_cc
    computation_core #(.P(P), .N1(N1)) u_cc (
      .clk, .rst,
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd(cmd[i]),
      .rsp_valid(rsp_valid[i]), .rsp_ready(rsp_ready[i]), .rsp(rsp[i]),
      .irq_idle(irq_idle[i]),
      .ld_valid(ld_valid[i]), .ld_ready(ld_ready[i]), .ld(ld[i]),
      .st_valid(st_valid[i]), .st_ready(st_ready[i]), .st(st[i]));
  end
endmodule

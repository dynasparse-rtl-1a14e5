// Buffered butterfly network, used as the Index Shuffle Network (ISN) and the
// Data Shuffle Network (DSN) of the Agile Computation Module.
//
// N input ports, N output ports (N a power of two).  Each packet carries a
// destination port number.  The network has log2(N) stages of 2x2 switches;
// stage i pairs port p with port p XOR 2^(log2(N)-1-i) and steers the packet
// by that bit of its destination, so after the last stage every packet sits
// on its destination port.  Every switch output is a one-entry register
// ("butterfly network with buffering to handle the routing congestion", as
// the paper implements it); when both inputs of a switch want the same output
// one waits, the choice alternating between them (round robin).  The paper
// names the topology and the buffering only; switch arbitration and the
// one-entry depth are this design's choices.
//
// Interface: valid/ready on every input and output port; a packet moves when
// valid and ready are both high.  Latency is log2(N) cycles without
// contention.  Order is preserved between packets of the same input and
// destination only; the users of this network do not depend on order.
module shuffle_network #(
  parameter int  N = 16,
  parameter type T = logic [31:0]
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic [N-1:0]                in_valid,
  output logic [N-1:0]                in_ready,
  input  logic [N-1:0][$clog2(N)-1:0] in_dest,
  input  T                            in_data  [N],
  output logic [N-1:0]                out_valid,
  input  logic [N-1:0]                out_ready,
  output T                            out_data [N]
);
  localparam int S  = $clog2(N);
  localparam int DW = $clog2(N);

  logic [N-1:0]         v   [S+1];
  logic [N-1:0][DW-1:0] dst [S+1];
  T                     dat [S+1][N];

  always_comb begin
    v[0]     = in_valid;
    dst[0]   = in_dest;
    dat[0]   = in_data;
  end

  for (genvar i = 1; i <= S; i++) begin : g_stage
    localparam int B = S - i;          // destination bit handled here
    logic [N-1:0] can_acc, gsel_part, take;
    logic [N-1:0] prio;                // 1: partner has priority
    logic [N-1:0] down_rdy;
    logic [N-1:0] r_up;                // r_up[p]: this stage accepts from port p of the previous one

    if (i == S) begin : g_last
      assign down_rdy = out_ready;
    end else begin : g_mid
      assign down_rdy = g_stage[i+1].r_up;
    end

    always_comb begin
      for (int o = 0; o < N; o++) begin
        automatic int  pt   = o ^ (1 << B);
        automatic logic cs  = v[i-1][o]  && (dst[i-1][o][B]  == o[B]);
        automatic logic cp  = v[i-1][pt] && (dst[i-1][pt][B] == o[B]);
        can_acc[o]   = !v[i][o] || down_rdy[o];
        gsel_part[o] = cp && (!cs || prio[o]);
        take[o]      = can_acc[o] && (cs || cp);
      end
      for (int p = 0; p < N; p++) begin
        automatic int od = dst[i-1][p][B] ? (p | (1 << B)) : (p & ~(1 << B));
        r_up[p] = can_acc[od] && ((od == p) ? !gsel_part[od] : gsel_part[od]) && v[i-1][p];
      end
    end

    always_ff @(posedge clk) begin
      for (int o = 0; o < N; o++) begin
        automatic int pt = o ^ (1 << B);
        if (rst) begin
          v[i][o] <= 1'b0;
          prio[o] <= 1'b0;
        end else begin
          if (take[o]) begin
            v[i][o]   <= 1'b1;
            dst[i][o] <= gsel_part[o] ? dst[i-1][pt] : dst[i-1][o];
            dat[i][o] <= gsel_part[o] ? dat[i-1][pt] : dat[i-1][o];
            prio[o]   <= !gsel_part[o];
          end else if (down_rdy[o]) begin
            v[i][o] <= 1'b0;
          end
        end
      end
    end
  end

  assign in_ready = g_stage[1].r_up;

  always_comb begin
    out_valid = v[S];
    out_data  = dat[S];
  end

  // A packet leaving the network is on its destination port.
  for (genvar p = 0; p < N; p++) begin : g_chk
    a_route: assert property (@(posedge clk) disable iff (rst) out_valid[p] |-> dst[S][p] == DW'(p));
  end
endmodule

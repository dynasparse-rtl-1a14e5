// Self-checking testbench of shuffle_network (ISN/DSN butterfly): every
// input injects packets {src, dest, seq} to random destinations under random
// output back-pressure.  Checks that each packet leaves at its destination
// port, that packets of one source-destination pair stay in order, that all
// arrive, that contention stalls occur and that with uniform traffic and no
// back-pressure the network moves at least N/4 packets per cycle.
module tb_shuffle_network;
  localparam int N = 16, S = $clog2(N), PER = 200;
  logic clk = 0, rst = 1;
  logic [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  logic [N-1:0][S-1:0] in_dest = '0;
  logic [31:0] in_data [N], out_data [N];
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sent [N], rcvd = 0, stalls = 0, cyc = 0;
  int nexp [N][N];
  bit bp = 1;
  logic [N-1:0] acc = '0;
  shuffle_network #(.N(N), .T(logic [31:0])) dut (.*);
  initial begin #5000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (!rst) begin
    cyc++;
    acc <= in_valid & in_ready;
    for (int o = 0; o < N; o++) if (out_valid[o] && out_ready[o]) begin
      automatic int s = out_data[o][31:24], d = out_data[o][23:16], q = out_data[o][15:0];
      checks++;
      if (d != o || q != nexp[s][d]) begin failures++; $display("port %0d got src %0d dest %0d seq %0d", o, s, d, q); end
      nexp[s][d] = q + 1; rcvd++;
    end
    for (int i = 0; i < N; i++) if (in_valid[i] && !in_ready[i]) stalls++;
  end
  initial begin
    for (int i = 0; i < N; i++) begin sent[i] = 0; in_data[i] = '0; for (int j = 0; j < N; j++) nexp[i][j] = 0; end
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int phase = 0; phase < 2; phase++) begin
      automatic int t0 = cyc, r0 = rcvd;
      automatic int seqs [N][N];
      bp = (phase == 0);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) seqs[i][j] = nexp[i][j];
      for (int i = 0; i < N; i++) sent[i] = 0;
      while (1) begin
        automatic bit more = 0;
        @(negedge clk);
        for (int o = 0; o < N; o++) out_ready[o] = bp ? ($urandom % 3 != 0) : 1'b1;
        for (int i = 0; i < N; i++)
          if (acc[i]) begin sent[i]++; in_valid[i] = 1'b0; end
        for (int i = 0; i < N; i++) if (sent[i] < PER) begin
          more = 1;
          if (!in_valid[i]) begin
            automatic int d = (i + sent[i] * 7 + $urandom % 3) % N;
            in_dest[i] = S'(d);
            in_data[i] = {8'(i), 8'(d), 16'(seqs[i][d])};
            seqs[i][d]++;
            in_valid[i] = 1'b1;
          end
        end
        if (!more) break;
      end
      @(negedge clk); in_valid = '0; out_ready = '1;
      repeat (200) @(posedge clk);
      checks++; if (rcvd - r0 != N * PER) begin failures++; $display("phase %0d: %0d of %0d", phase, rcvd - r0, N * PER); end
      if (phase == 1) begin
        checks++; if ((rcvd - r0) * 4 < N * (cyc - t0)) begin failures++; $display("throughput %0d in %0d cycles", rcvd - r0, cyc - t0); end
      end
    end
    checks++; if (stalls == 0) begin failures++; $display("no stall seen"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

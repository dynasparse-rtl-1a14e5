// Self-checking testbench of d2s (Dense-to-Sparse, Fig. 9): first the
// paper's example row, then random rows of random density streamed one per
// cycle; checks the compacted values, their column indices, the count, the
// sideband and the log2(N) cycle latency / one-row-per-cycle rate.
module tb_d2s;
  localparam int N = 16, W = 32, S = $clog2(N);
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [N-1:0][W-1:0] in_vals = '0, out_vals;
  logic [N-1:0][S-1:0] out_cols;
  logic [S:0] out_cnt;
  logic [31:0] in_sb = 0, out_sb;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sent = 0, got = 0, cyc = 0, first_out = -1;
  logic [N-1:0][W-1:0] hist [1024];
  d2s #(.N(N), .W(W)) dut (.*);
  initial begin #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid) begin
      automatic int n = 0;
      if (first_out < 0) first_out = cyc;
      for (int p = 0; p < N; p++)
        if (hist[out_sb][p] != 0) begin
          checks++;
          if (out_vals[n] != hist[out_sb][p] || out_cols[n] != S'(p)) begin
            failures++; $display("row %0d slot %0d wrong", out_sb, n);
          end
          n++;
        end
      checks++; if (out_cnt != (S+1)'(n)) begin failures++; $display("cnt %0d != %0d", out_cnt, n); end
      checks++; if (out_sb != 32'(got)) failures++;
      got++;
    end
  end
  initial begin
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      in_valid = 1; in_sb = 32'(sent);
      for (int p = 0; p < N; p++) begin
        if (i == 0) in_vals[p] = (p % 3 == 1) ? W'(p + 1) : '0;   // sparse example row
        else in_vals[p] = (($urandom % 100) < (i % 100)) ? W'($urandom) : '0;
      end
      hist[sent] = in_vals; sent++;
      if (i == 0) first_out = -1;
    end
    @(negedge clk); in_valid = 0;
    repeat (S + 3) @(posedge clk);
    checks++; if (got != sent) begin failures++; $display("got %0d of %0d", got, sent); end
    // rate: one row per cycle after a latency of S cycles
    checks++; if (first_out - 3 != S) begin failures++; $display("latency %0d", first_out - 3); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

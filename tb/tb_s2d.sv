// Self-checking testbench of s2d (Sparse-to-Dense): random sorted column
// sets with values are scattered back to dense rows; checks every element,
// the sideband, the row count and the log2(N) latency at one row per cycle.
module tb_s2d;
  localparam int N = 16, W = 32, S = $clog2(N);
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  logic [N-1:0][W-1:0] in_vals = '0, out_vals;
  logic [N-1:0][S-1:0] in_cols = '0;
  logic [S:0] in_cnt = 0;
  logic [31:0] in_sb = 0, out_sb;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sent = 0, got = 0, cyc = 0, t_in = 0, t_out = -1;
  logic [N-1:0][W-1:0] hist [1024];
  int n;
  logic [N-1:0][W-1:0] d;
  s2d #(.N(N), .W(W)) dut (.*);
  initial begin #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid) begin
      if (t_out < 0) t_out = cyc;
      checks++;
      if (out_vals != hist[out_sb]) begin failures++; $display("row %0d wrong", out_sb); end
      checks++; if (out_sb != 32'(got)) failures++;
      got++;
    end
  end
  initial begin
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      n = 0; d = '0;
      in_vals = '0; in_cols = '0;
      for (int p = 0; p < N; p++)
        if (($urandom % 100) < (i % 100)) begin
          d[p] = W'($urandom | 1); in_vals[n] = d[p]; in_cols[n] = S'(p); n++;
        end
      in_cnt = (S+1)'(n); in_valid = 1; in_sb = 32'(sent); hist[sent] = d; sent++;
      if (i == 0) t_in = cyc;
    end
    @(negedge clk); in_valid = 0;
    repeat (S + 3) @(posedge clk);
    checks++; if (got != sent) begin failures++; $display("got %0d of %0d", got, sent); end
    checks++; if (t_out - t_in - 1 != S) begin failures++; $display("latency %0d", t_out - t_in - 1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

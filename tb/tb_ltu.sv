// Self-checking testbench of ltu (Layout Transformation Unit): streams
// random N x N blocks row by row with random gaps and checks that each block
// comes out as N columns (out_idx = column) equal to the transpose, with the
// block's sideband, and that back-to-back blocks sustain one row per cycle.
module tb_ltu;
  localparam int N = 16, W = 32;
  logic clk = 0, rst = 1, in_valid = 0, in_ready, out_valid;
  logic [N-1:0][W-1:0] in_vals = '0, out_vals;
  logic [$clog2(N)-1:0] out_idx;
  logic [31:0] in_sb = 0, out_sb;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, blk_out = 0, col_out = 0, cyc = 0, t0, t1;
  logic [W-1:0] m [64][N][N];
  localparam int NB = 40;
  ltu #(.N(N), .W(W)) dut (.*);
  initial begin #2000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid) begin
      checks++;
      if (out_idx != $clog2(N)'(col_out) || out_sb != 32'(blk_out)) begin
        failures++; $display("order wrong blk %0d col %0d", blk_out, col_out);
      end
      for (int r = 0; r < N; r++) begin
        checks++; if (out_vals[r] != m[out_sb % 64][r][out_idx]) failures++;
      end
      col_out++;
      if (col_out == N) begin col_out = 0; blk_out++; end
    end
  end
  initial begin
    repeat (2) @(posedge clk); #1 rst = 0;
    t0 = cyc;
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        for (int k = 0; k < N; k++) begin m[b % 64][r][k] = $urandom; in_vals[k] = m[b % 64][r][k]; end
        in_sb = 32'(b); in_valid = 1;
        @(posedge clk); while (!in_ready) @(posedge clk);
      end
    @(negedge clk); in_valid = 0;
    t1 = cyc;
    repeat (3 * N) @(posedge clk);
    checks++; if (blk_out != NB) begin failures++; $display("blocks %0d", blk_out); end
    // one row per cycle: NB*N rows in at most NB*N + N cycles
    checks++; if (t1 - t0 > NB * N + N) begin failures++; $display("rate: %0d cycles", t1 - t0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

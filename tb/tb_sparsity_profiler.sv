// Self-checking testbench of sparsity_profiler: random rows of random
// density, some cycles idle, with clr between runs; checks nnz and total
// against a software count once busy drops and that the pipeline drains in
// log2(N)+1 cycles.
module tb_sparsity_profiler;
  localparam int N = 16, W = 32;
  logic clk = 0, rst = 1, clr = 0, in_valid = 0, busy;
  logic [N-1:0][W-1:0] in_vals = '0;
  logic [31:0] nnz, total;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  sparsity_profiler #(.N(N), .W(W)) dut (.*);
  initial begin #2000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int run = 0; run < 20; run++) begin
      automatic int en = 0, et = 0, dr = 0;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int i = 0; i < 100; i++) begin
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
        for (int p = 0; p < N; p++) in_vals[p] = (($urandom % 100) < run * 5) ? W'($urandom | 1) : '0;
        if (in_valid) begin
          et += N;
          for (int p = 0; p < N; p++) en += (in_vals[p] != 0);
        end
      end
      @(negedge clk); in_valid = 0;
      while (busy) begin @(negedge clk); dr++; end
      checks++; if (dr > $clog2(N) + 1) begin failures++; $display("drain %0d cycles", dr); end
      checks++; if (nnz != 32'(en) || total != 32'(et)) begin
        failures++; $display("run %0d: nnz %0d/%0d total %0d/%0d", run, nnz, en, total, et);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// Self-checking testbench of sparse_queue (the SCP's Sparse Data Queue):
// random loads of dense rows, lookups and write/merge operations against a
// dense reference row; checks hit, old_val, cnt and dense_out every cycle.
module tb_sparse_queue;
  import dyn_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst = 1, clr = 0, load = 0, wr = 0, hit;
  logic [N-1:0][DATA_W-1:0] load_vals = '0, dense_out, ref_v;
  logic [N-1:0] ref_p;
  logic [$clog2(N)-1:0] lk_col = 0;
  data_t old_val, wr_val = 0;
  logic [$clog2(N+1)-1:0] cnt;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  sparse_queue #(.N(N)) dut (.*);
  initial begin #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    ref_v = '0; ref_p = '0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      clr = ($urandom % 50) == 0; load = ($urandom % 10) == 0; wr = $urandom % 2;
      lk_col = $clog2(N)'($urandom); wr_val = data_t'($urandom % 100);
      for (int p = 0; p < N; p++) load_vals[p] = (($urandom % 3) == 0) ? DATA_W'($urandom % 50 + 1) : '0;
      #1;
      checks++;
      if (hit !== ref_p[lk_col] || (hit && old_val !== ref_v[lk_col])) begin
        failures++; $display("lookup col %0d hit %0d/%0d", lk_col, hit, ref_p[lk_col]);
      end
      if (clr) begin ref_v = '0; ref_p = '0; end
      else if (load) begin
        for (int p = 0; p < N; p++) begin ref_v[p] = load_vals[p]; ref_p[p] = load_vals[p] != 0; end
      end else if (wr) begin ref_v[lk_col] = wr_val; ref_p[lk_col] = 1'b1; end
      @(posedge clk); #1;
      checks++;
      if (dense_out !== ref_v || cnt !== ($clog2(N+1))'($countones(ref_p))) begin
        failures++; $display("state mismatch cnt %0d/%0d", cnt, $countones(ref_p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

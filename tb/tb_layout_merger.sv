// Self-checking testbench of layout_merger: random row words merged with a
// random column region (transposed partial result) under SUM/MAX/MIN, and
// with col_en low (pass-through path); checks the registered output word,
// row and the one-cycle latency.
module tb_layout_merger;
  import dyn_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst = 1, in_valid = 0, col_en = 0, out_valid;
  logic [IDX_W-1:0] in_row = 0, out_row;
  logic [N-1:0][DATA_W-1:0] row_word = '0, out_word, exp_w;
  logic [N-1:0][DATA_W-1:0] colreg [N];
  agg_e agg = AGG_SUM;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  layout_merger #(.N(N)) dut (.*);
  initial begin #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int k = 0; k < N; k++) colreg[k] = '0;
    repeat (2) @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) begin
        row_word[k] = DATA_W'($urandom % 200) - 100;
        for (int r = 0; r < N; r++) colreg[k][r] = DATA_W'($urandom % 200) - 100;
      end
      agg = agg_e'($urandom % 3); col_en = $urandom % 2;
      in_row = IDX_W'($urandom % (2 * N)); in_valid = 1;
      for (int k = 0; k < N; k++) begin
        automatic data_t a = row_word[k], c = colreg[k][in_row % N];
        if (!col_en || in_row >= N) exp_w[k] = a;
        else case (agg)
          AGG_SUM: exp_w[k] = a + c;
          AGG_MAX: exp_w[k] = (a > c) ? a : c;
          default: exp_w[k] = (a < c) ? a : c;
        endcase
      end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_word != exp_w || out_row != in_row) begin
        failures++; $display("mismatch row %0d agg %s col_en %0d", in_row, agg.name(), col_en);
      end
      in_valid = 0;
      @(posedge clk); #1; checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// Self-checking testbench of alu_array in its three modes:
//  GEMM  - streams X (P x n) and Y (n x P) unskewed, one k per cycle, and
//          checks the P x P accumulators after n+2P-1 enabled cycles
//          (the array skews internally; this is the rate the core relies on);
//  SpDMM - random updates into the P/2 Update Units, checks upd_u one cycle
//          later and the combinational Reduce result for SUM/MAX/MIN;
//  SPMM  - the SCP multiply (ALU(s,P-2), registered) and merge (ALU(s,P-1)).
module tb_alu_array;
  import dyn_pkg::*;
  localparam int P = 16, H = P / 2;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  mode_e mode = MODE_GEMM;
  agg_e agg = AGG_SUM;
  logic gemm_en = 0, gemm_clr = 0;
  data_t gemm_a [P], gemm_b [P], gemm_acc [P][P];
  logic [H-1:0] upd_en = '0;
  data_t upd_val [H], upd_y [H][P], upd_u [H][P], red_z [H][P], red_out [H][P];
  logic [P-1:0] scp_mul_en = '0;
  data_t scp_a [P], scp_b [P], scp_prod [P], scp_ma [P], scp_mb [P], scp_merge [P];
  int checks = 0, failures = 0;
  data_t X [P][64], Y [64][P];
  alu_array #(.P(P)) dut (.*);
  initial begin #2000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic data_t ag(agg_e g, data_t a, data_t b);
    case (g) AGG_SUM: return a + b; AGG_MAX: return a > b ? a : b; default: return a < b ? a : b; endcase
  endfunction
  initial begin
    for (int i = 0; i < P; i++) begin gemm_a[i] = 0; gemm_b[i] = 0; scp_a[i] = 0; scp_b[i] = 0; scp_ma[i] = 0; scp_mb[i] = 0; end
    for (int u = 0; u < H; u++) begin upd_val[u] = 0; for (int k = 0; k < P; k++) begin upd_y[u][k] = 0; red_z[u][k] = 0; end end
    repeat (2) @(posedge clk); #1 rst = 0;
    // GEMM
    for (int t = 0; t < 3; t++) begin
      automatic int n = 16 + 16 * t;
      for (int r = 0; r < P; r++) for (int k = 0; k < n; k++) begin X[r][k] = data_t'($urandom % 21) - 10; Y[k][r] = data_t'($urandom % 21) - 10; end
      @(negedge clk); mode = MODE_GEMM; gemm_clr = 1;
      @(negedge clk); gemm_clr = 0; gemm_en = 1;
      for (int c = 0; c < n + 2 * P - 1; c++) begin
        for (int i = 0; i < P; i++) begin gemm_a[i] = (c < n) ? X[i][c] : 0; gemm_b[i] = (c < n) ? Y[c][i] : 0; end
        @(negedge clk);
      end
      gemm_en = 0;
      for (int r = 0; r < P; r++) for (int c = 0; c < P; c++) begin
        automatic data_t s = 0;
        for (int k = 0; k < n; k++) s += X[r][k] * Y[k][c];
        checks++; if (gemm_acc[r][c] != s) begin failures++; if (failures < 5) $display("GEMM [%0d][%0d] %0d != %0d", r, c, gemm_acc[r][c], s); end
      end
    end
    // SpDMM
    @(negedge clk); mode = MODE_SPDMM;
    for (int i = 0; i < 300; i++) begin
      automatic data_t ev [H];
      automatic data_t ey [H][P];
      automatic logic [H-1:0] en;
      @(negedge clk);
      en = H'($urandom);
      for (int u = 0; u < H; u++) begin
        upd_en[u] = en[u]; upd_val[u] = data_t'($urandom % 21) - 10; ev[u] = upd_val[u];
        for (int k = 0; k < P; k++) begin upd_y[u][k] = data_t'($urandom % 21) - 10; ey[u][k] = upd_y[u][k]; end
      end
      @(negedge clk); upd_en = '0; agg = agg_e'($urandom % 3);
      for (int u = 0; u < H; u++) for (int k = 0; k < P; k++) red_z[u][k] = data_t'($urandom % 101) - 50;
      #1;
      for (int u = 0; u < H; u++) if (en[u]) for (int k = 0; k < P; k++) begin
        checks++;
        if (upd_u[u][k] != ev[u] * ey[u][k] || red_out[u][k] != ag(agg, ev[u] * ey[u][k], red_z[u][k])) begin
          failures++; if (failures < 5) $display("SpDMM u%0d k%0d", u, k);
        end
      end
    end
    // SPMM
    @(negedge clk); mode = MODE_SPMM;
    for (int i = 0; i < 300; i++) begin
      automatic data_t pa [P], pb [P];
      @(negedge clk);
      scp_mul_en = '1;
      for (int s = 0; s < P; s++) begin scp_a[s] = data_t'($urandom % 21) - 10; scp_b[s] = data_t'($urandom % 21) - 10; pa[s] = scp_a[s]; pb[s] = scp_b[s]; end
      @(negedge clk); scp_mul_en = '0; agg = agg_e'($urandom % 3);
      for (int s = 0; s < P; s++) begin scp_ma[s] = data_t'($urandom % 101) - 50; scp_mb[s] = data_t'($urandom % 101) - 50; end
      #1;
      for (int s = 0; s < P; s++) begin
        checks++;
        if (scp_prod[s] != pa[s] * pb[s] || scp_merge[s] != ag(agg, scp_ma[s], scp_mb[s])) begin
          failures++; if (failures < 5) $display("SPMM s%0d", s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

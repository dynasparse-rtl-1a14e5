// The P x P ALU array of the Agile Computation Module, shared by the three
// execution modes through operand multiplexers selected by `mode`.
//
// GEMM:  output-stationary systolic array.  Row r of X enters ALU(r,0) from
//        the west, column c of Y enters ALU(0,c) from the north; operands
//        move one ALU east/south per cycle and every ALU accumulates
//        a*b into its register (P*P MACs per cycle).  The west and north
//        inputs are skewed inside the array (row r / column c delayed by r / c
//        cycles), so the caller presents X[.][k] and Y[k][.] together.
// SpDMM: P/2 Update Units and P/2 Reduce Units, each a 2 x P/2 block of
//        ALUs.  Update Unit u is rows 2u..2u+1, columns 0..P/2-1, and
//        multiplies e.value with the P elements of Y[i] (registered result);
//        Reduce Unit u is rows 2u..2u+1, columns P/2..P-1, and combines that
//        product with the P elements of Z[j] read from the Result Buffer
//        (combinational result, written back by the core).  Element k of a
//        unit is ALU (2u + k/(P/2), k mod (P/2)) for Update and the same plus
//        P/2 columns for Reduce.  P*P/2 MACs per cycle.
// SPMM:  P Sparse Computation Pipelines; SCP s uses ALU(s,P-2) to multiply
//        (registered) and ALU(s,P-1) to merge into its Sparse Data Queue
//        (combinational).  P MACs per cycle.
//
// The division of the array follows the paper's text and Figures 7 and 8
// (Update Units on the left half, Reduce Units on the right half, the SCP's
// two ALUs at the right end of each row); the exact element numbering inside
// a unit is this design's choice.
module alu_array
  import dyn_pkg::*;
#(
  parameter int P = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  mode_e      mode,
  input  agg_e       agg,
  // GEMM
  input  logic       gemm_en,
  input  logic       gemm_clr,
  input  data_t      gemm_a   [P],
  input  data_t      gemm_b   [P],
  output data_t      gemm_acc [P][P],
  // SpDMM
  input  logic [P/2-1:0] upd_en,
  input  data_t      upd_val  [P/2],
  input  data_t      upd_y    [P/2][P],
  output data_t      upd_u    [P/2][P],
  input  data_t      red_z    [P/2][P],
  output data_t      red_out  [P/2][P],
  // SPMM
  input  logic [P-1:0] scp_mul_en,
  input  data_t      scp_a    [P],
  input  data_t      scp_b    [P],
  output data_t      scp_prod [P],
  input  data_t      scp_ma   [P],
  input  data_t      scp_mb   [P],
  output data_t      scp_merge[P]
);
  localparam int H = P / 2;

  data_t y [P][P];
  data_t q [P][P];
  data_t a_fwd [P][P];    // systolic operand registers, moving east
  data_t b_fwd [P][P];    // moving south
  data_t a_skew [P][P];   // a_skew[r][d]: west input of row r delayed by d+1
  data_t b_skew [P][P];

  // Input skew for the systolic mode.
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int r = 0; r < P; r++)
        for (int d = 0; d < P; d++) begin
          a_skew[r][d] <= '0;
          b_skew[r][d] <= '0;
        end
    end else if (mode == MODE_GEMM && gemm_en) begin
      for (int r = 0; r < P; r++) begin
        a_skew[r][0] <= gemm_a[r];
        b_skew[r][0] <= gemm_b[r];
        for (int d = 1; d < P; d++) begin
          a_skew[r][d] <= a_skew[r][d-1];
          b_skew[r][d] <= b_skew[r][d-1];
        end
      end
    end
  end

  for (genvar r = 0; r < P; r++) begin : g_row
    for (genvar c = 0; c < P; c++) begin : g_col
      alu_op_e op;
      data_t   a, b, cc;
      logic    en, clr;
      data_t   west, north;

      if (r == 0) begin : g_n0
        assign north = (c == 0) ? gemm_b[0] : b_skew[c][c-1];
      end else begin : g_n1
        assign north = b_fwd[r-1][c];
      end
      if (c == 0) begin : g_w0
        assign west = (r == 0) ? gemm_a[0] : a_skew[r][r-1];
      end else begin : g_w1
        assign west = a_fwd[r][c-1];
      end

      always_comb begin
        op  = ALU_PASS;
        a   = '0;
        b   = '0;
        cc  = '0;
        en  = 1'b0;
        clr = 1'b0;
        unique case (mode)
          MODE_GEMM: begin
            op  = ALU_MAC;
            a   = west;
            b   = north;
            cc  = q[r][c];
            en  = gemm_en;
            clr = gemm_clr;
          end
          MODE_SPDMM: begin
            if (c < H) begin                          // Update Unit r/2
              op = ALU_MUL;
              a  = upd_val[r/2];
              b  = upd_y[r/2][(r%2)*H + c];
              en = upd_en[r/2];
            end else begin                            // Reduce Unit r/2
              op = agg2op(agg);
              a  = q[r][c-H];
              b  = red_z[r/2][(r%2)*H + c - H];
            end
          end
          MODE_SPMM: begin
            if (c == P-2) begin                       // SCP r: multiply
              op = ALU_MUL;
              a  = scp_a[r];
              b  = scp_b[r];
              en = scp_mul_en[r];
            end else if (c == P-1) begin              // SCP r: merge
              op = agg2op(agg);
              a  = scp_ma[r];
              b  = scp_mb[r];
            end
          end
          default: ;
        endcase
      end

      dyn_alu u_alu (
        .clk, .rst, .en, .clr, .op, .a, .b, .c(cc), .y(y[r][c]), .q(q[r][c])
      );

      always_ff @(posedge clk) begin
        if (rst) begin
          a_fwd[r][c] <= '0;
          b_fwd[r][c] <= '0;
        end else if (mode == MODE_GEMM && gemm_en) begin
          a_fwd[r][c] <= west;
          b_fwd[r][c] <= north;
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r < P; r++) begin
      for (int c = 0; c < P; c++) gemm_acc[r][c] = q[r][c];
      scp_prod[r]  = q[r][P-2];
      scp_merge[r] = y[r][P-1];
    end
    for (int u = 0; u < H; u++)
      for (int k = 0; k < P; k++) begin
        upd_u[u][k]   = q[2*u + k/H][k%H];
        red_out[u][k] = y[2*u + k/H][k%H + H];
      end
  end
endmodule

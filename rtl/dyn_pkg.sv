// Shared types and constants of the sparse GNN accelerator.
//
// The Computation Core works on 32-bit signed integer words (the paper moves
// "16 32-bit data per cycle" from DDR; it does not say whether they are float
// or fixed point, so integer arithmetic is this design's choice).  One
// "row word" holds P_SYS elements: a row of the dense right-hand matrix Y and a
// row of the result Z are exactly one word, i.e. the output tile width N2 of a
// task equals P_SYS in this implementation.
package dyn_pkg;

  localparam int P_SYS   = 16;   // ALU array dimension (paper: p_sys = 16)
  localparam int DATA_W  = 32;   // element width
  localparam int N_CC    = 7;    // Computation Cores on the device (paper: CC0..CC6)
  localparam int N1_MAX  = 256;  // largest partition side the buffers hold (assumed)
  localparam int IDX_W   = 16;   // row / column index width in commands and COO tuples
  localparam int CNT_W   = 32;   // counters reported to the soft processor

  typedef logic signed [DATA_W-1:0] data_t;

  // Three execution modes of the Agile Computation Module.
  typedef enum logic [1:0] {MODE_GEMM = 2'd0, MODE_SPDMM = 2'd1, MODE_SPMM = 2'd2} mode_e;

  // ALU operations.
  typedef enum logic [2:0] {
    ALU_PASS = 3'd0, ALU_MUL = 3'd1, ALU_ADD = 3'd2, ALU_MAC = 3'd3,
    ALU_MAX  = 3'd4, ALU_MIN = 3'd5
  } alu_op_e;

  // Aggregation (reduce) operator of a task (IR field "Aggregation operator").
  // Mean is executed as Sum on a pre-normalised adjacency matrix.
  typedef enum logic [1:0] {AGG_SUM = 2'd0, AGG_MAX = 2'd1, AGG_MIN = 2'd2} agg_e;

  // Activation applied on the store path (IR fields "Activation type/enabled").
  typedef enum logic [1:0] {ACT_NONE = 2'd0, ACT_RELU = 2'd1, ACT_PRELU = 2'd2} act_e;

  // One non-zero in COO form: X[row][col] = val.
  typedef struct packed {
    logic [IDX_W-1:0] row;
    logic [IDX_W-1:0] col;
    data_t            val;
  } coo_t;

  // Commands sent by the soft processor to a Computation Core.
  typedef enum logic [3:0] {
    OP_LOAD_U  = 4'd0,  // sparse operand into BufferU (COO)
    OP_LOAD_O  = 4'd1,  // operand into BufferO (dense, packed sparse rows, or transposed)
    OP_LOAD_P  = 4'd2,  // dense operand into BufferP in column-major order (via LTU)
    OP_CLEAR   = 4'd3,  // initialise rows of the Result Buffer
    OP_GEMM    = 4'd4,
    OP_SPDMM   = 4'd5,
    OP_SPMM    = 4'd6,
    OP_STORE   = 4'd7   // Layout Merger -> activation -> Sparsity Profiler -> store stream
  } opcode_e;

  typedef struct packed {
    opcode_e          op;
    logic             barrier;   // issue only when the core is otherwise idle
    logic             set;       // which half of the double buffer
    logic             transpose; // LOAD_U: swap row/col; LOAD_O: write X^T via LTU; SPDMM: result to column-major RB
    logic             sparse;    // LOAD_O: store rows as packed sparse rows (SPMM)
    agg_e             agg;
    act_e             act;
    logic [IDX_W-1:0] rows;      // LOAD: beats; CLEAR/STORE/GEMM: rows m
    logic [IDX_W-1:0] n;         // GEMM: inner dimension n
    logic [IDX_W-1:0] stride;    // BufferO words per row (dense X)
  } cc_cmd_t;

  // Response: sparsity information of a stored output partition.
  typedef struct packed {
    logic [CNT_W-1:0] nnz;
    logic [CNT_W-1:0] total;
  } cc_rsp_t;

  // One beat of the external-memory load stream: a P_SYS-wide chunk of one
  // row, columns colbase .. colbase+P_SYS-1, either dense (vals) or COO
  // (cnt compacted entries, cols relative to colbase).
  typedef struct packed {
    logic                           coo;
    logic [IDX_W-1:0]               row;
    logic [IDX_W-1:0]               colbase;
    logic [$clog2(P_SYS+1)-1:0]     cnt;
    logic [P_SYS-1:0][$clog2(P_SYS)-1:0] cols;
    logic [P_SYS-1:0][DATA_W-1:0]   vals;
  } ld_beat_t;

  // One beat of the store stream: a dense output row.
  typedef struct packed {
    logic [IDX_W-1:0]             row;
    logic [P_SYS-1:0][DATA_W-1:0] vals;
  } st_beat_t;

  // BufferO word: a dense row chunk or a packed sparse row of Y.
  typedef struct packed {
    logic [$clog2(P_SYS+1)-1:0]          nnz;
    logic [P_SYS-1:0][$clog2(P_SYS)-1:0] cols;
    logic [P_SYS-1:0][DATA_W-1:0]        vals;
  } oword_t;

  function automatic data_t alu_f(alu_op_e op, data_t a, data_t b, data_t c);
    data_t p;
    p = data_t'(a * b);
    unique case (op)
      ALU_MUL:  return p;
      ALU_ADD:  return data_t'(a + b);
      ALU_MAC:  return data_t'(p + c);
      ALU_MAX:  return (a > b) ? a : b;
      ALU_MIN:  return (a < b) ? a : b;
      default:  return a;
    endcase
  endfunction

  function automatic alu_op_e agg2op(agg_e g);
    unique case (g)
      AGG_MAX: return ALU_MAX;
      AGG_MIN: return ALU_MIN;
      default: return ALU_ADD;
    endcase
  endfunction

endpackage

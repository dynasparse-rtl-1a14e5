# Dynasparse accelerator core — SystemVerilog model

Graph neural network inference multiplies matrices whose sparsity is extreme and
changes from layer to layer: the adjacency matrix is very sparse, feature matrices
start sparse and become denser (or, after ReLU, sparser again). No single dense or
sparse kernel is best for every product. The idea of this design is a compute core
whose ALU array can be re-wired, in one cycle, into three engines:

* **GEMM** – a P x P output-stationary systolic array for dense x dense;
* **SpDMM** – P/2 *Update Units* and P/2 *Reduce Units* for sparse x dense
  (one non-zero of the sparse operand scales one dense row);
* **SPMM** – P *Sparse Computation Pipelines* (SCPs) for sparse x sparse, each
  merging products into a *Sparse Data Queue* holding one output row.

A runtime measures the density of each operand tile and chooses the engine per
tile (the K2P rule): skip when one operand is all zero, GEMM when both are at least
half dense, SpDMM when the denser one has density at least 2/P, otherwise SPMM.
The chip holds several identical cores (seven by default, P = 16) that each run
their own task stream.

## Top level

`dynasparse_top` instantiates `NCC` independent `computation_core`s. Each core
has a command stream (from the control processor), a response carrying the
non-zero count of every stored result, an idle interrupt, a load stream and a
store stream (to external memory). The control processor, its software, the
external DRAM and the host link are not part of the RTL; their signals are ports.

## Inside a core

Commands (`cc_cmd_t`, `rtl/dyn_pkg.sv`): `LOAD_U`, `LOAD_O`, `LOAD_P`, `CLEAR`,
`GEMM`, `SPDMM`, `SPMM`, `STORE`. Each carries a buffer-set bit (double
buffering: one set can be loaded while the other is computed), a `barrier` bit
(wait until the core is idle), `rows`, `n`, `stride`, `transpose`, `sparse`, the
aggregation operator and the activation.

* **Buffers** (`bank_ram`, P banks each): BufferU holds the sparse operand as a
  list of (row, col, value) entries striped over the banks; BufferO holds a dense
  matrix, or in SPMM the second operand as packed sparse rows; BufferP holds the
  dense right operand of GEMM by column; the Result Buffer holds Z (P words per
  row) plus a P x P column region for transposed results.
* **Loader**: a load beat is either P dense values or a compacted (col, value)
  list. Dense beats are compacted by `d2s` (prefix sum of zeros followed by
  log2 P shift stages) for BufferU/sparse BufferO; compacted beats are expanded by
  `s2d` for dense buffers; `ltu` transposes P x P blocks for column-major targets.
* **GEMM**: X rows come from BufferO, Y from BufferP, one k per cycle; the array
  skews the operands internally. One P x P block of Z takes n + 2P + 2 cycles
  (clear, n + 2P accumulate/drain, write-back added into the Result Buffer).
* **SpDMM**: P/2 BufferU entries per cycle enter the Index Shuffle Network (ISN),
  which routes entry (i, j, a) to bank j mod P of BufferO to fetch row j of the
  dense operand; the Data Shuffle Network (DSN) then routes the pair to Update
  Unit i mod P/2. The Update Unit multiplies, the paired Reduce Unit adds the
  product into row i of the Result Buffer in the next cycle. Peak rate: P/2
  non-zeros per cycle. Both networks are buffered butterflies (`shuffle_network`)
  that stall their inputs on contention.
* **SPMM**: like SpDMM, but the DSN delivers (entry, sparse row of Y) to SCP
  i mod P. An SCP multiplies the entry's value with each non-zero of the row
  (ALU(s, P-2)) and merges into its Sparse Data Queue (ALU(s, P-1)). When the
  output row changes the queue is written back to the Result Buffer and loaded
  with the stored partial row, so several tasks can accumulate into one result.
* **Store**: Result Buffer rows are read and cleared, merged with the column
  region by the `layout_merger` (transposed SpDMM results), passed through the
  activation (ReLU or a fixed-slope PReLU), counted by the `sparsity_profiler`
  (comparators and an adder tree) and streamed out; the count returns as `rsp`.
* A mode switch costs one cycle (`C_SWITCH`) and is counted in
  `stat_mode_switches`.

## Where this RTL goes beyond or departs from the source description

* 32-bit signed integer arithmetic (the original used 32-bit data; the number
  format is this design's choice). PReLU uses a fixed slope of 1/4.
* Partition size N1 = 256 (the original computes it at compile time); the
  result width N2 equals P.
* Row-to-unit mapping (row mod P/2, row mod P), butterfly arbitration
  (round-robin), buffer depths and the command format are this design's choices.
* A transposed LOAD_O must be streamed column-block by column-block.
* Not built: the control processor and runtime software (K2P mapping and task
  scheduling are modelled in the top-level testbench), the compiler, external
  memory and host interface.

## Verification

Every block has a self-checking testbench `tb/tb_<module>.sv` (`tb_dyn_alu` for
the ALU). `tb_computation_core` runs GEMM (with its cycle bound), SpDMM, SPMM
with a load into the other buffer set overlapped, transposed SpDMM and a task
mixing GEMM and SPMM into one result. `tb_dynasparse_top` (two cores, N1 = 32)
dispatches ten kernels dynamically to whichever core is idle, applies the K2P
rule and checks that each engine, a skip, mode switches, ISN and DSN stalls and
SCP row switches all occur. The largest simulated size is one core at N1 = 64,
P = 16; no test runs the seven-core top at its default size.

Run one with Verilator, e.g.

    verilator --binary --timing --assert -Irtl -Itb rtl/dyn_pkg.sv \
        tb/tb_dynasparse_top.sv --top-module tb_dynasparse_top -o sim
    ./obj_dir/sim

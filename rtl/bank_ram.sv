// One memory bank of BufferU, BufferO or BufferP.
//
// Each buffer of the Agile Computation Module has P_SYS such banks so that
// P_SYS words can be read in parallel (paper: "Each Buffer has p_sys memory
// banks").  This is a simple dual-port RAM: one write port, one read port
// with a registered output (block-RAM style).  The read data register holds
// its value while re is low, which lets a stalled pipeline stage keep its
// operand.  Depth and word type are parameters; the contents are not reset.
module bank_ram #(
  parameter int  DEPTH = 256,
  parameter type T     = logic [31:0]
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  T                         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output T                         rdata
);
  T mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

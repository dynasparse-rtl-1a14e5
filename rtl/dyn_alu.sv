// One ALU of the Agile Computation Module's array.
//
// Computes y = op(a, b, c) combinationally (multiply, add, multiply-accumulate,
// max, min or pass) and can capture y in its output register q.  The paper says
// only that "each ALU can execute various arithmetic operations, including
// multiplication, max, addition"; the operation set, the 32-bit integer
// arithmetic and the single output register are this design's choices.
//
// Timing: y is combinational; q updates on the rising edge when en=1, and is
// cleared to 0 when clr=1 (clr wins over en).  Synchronous active-high reset.
module dyn_alu
  import dyn_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  logic    en,
  input  logic    clr,
  input  alu_op_e op,
  input  data_t   a,
  input  data_t   b,
  input  data_t   c,
  output data_t   y,
  output data_t   q
);
  assign y = alu_f(op, a, b, c);

  always_ff @(posedge clk) begin
    if (rst || clr) q <= '0;
    else if (en)    q <= y;
  end
endmodule

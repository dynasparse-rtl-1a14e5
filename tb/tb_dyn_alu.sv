// Self-checking testbench of dyn_alu: drives random operands and every
// opcode, compares the combinational result y with an independent model and
// checks the registered q (en loads, clr clears, hold otherwise).
module tb_dyn_alu;
  import dyn_pkg::*;
  logic clk = 0, rst = 1, en, clr;
  alu_op_e op;
  data_t a, b, c, y, q, qm;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  dyn_alu dut (.*);
  initial begin #100000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic data_t m(alu_op_e o, data_t x, data_t z, data_t w);
    case (o)
      ALU_PASS: return x;
      ALU_MUL:  return x * z;
      ALU_ADD:  return x + z;
      ALU_MAC:  return w + x * z;
      ALU_MAX:  return (x > z) ? x : z;
      ALU_MIN:  return (x < z) ? x : z;
      default:  return '0;
    endcase
  endfunction
  initial begin
    en = 0; clr = 0; op = ALU_PASS; a = 0; b = 0; c = 0; qm = 0;
    repeat (2) @(posedge clk); rst = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      op = alu_op_e'($urandom % 6);
      a = data_t'($urandom % 201) - 100; b = data_t'($urandom % 201) - 100; c = data_t'($urandom);
      en = $urandom % 2; clr = ($urandom % 8) == 0;
      #1; checks++; if (y !== m(op, a, b, c)) begin failures++; $display("y mismatch op=%s", op.name()); end
      if (clr) qm = 0; else if (en) qm = m(op, a, b, c);
      @(posedge clk); #1;
      checks++; if (q !== qm) begin failures++; $display("q mismatch %0d %0d", q, qm); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

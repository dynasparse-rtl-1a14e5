// Self-checking testbench of bank_ram: random writes and reads against an
// array model; checks the one-cycle registered read latency and that the
// read register holds its value while re is low.
module tb_bank_ram;
  localparam int D = 64;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata, mem [D], exp_d;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bank_ram #(.DEPTH(D), .T(logic [31:0])) dut (.*);
  initial begin #1000000; $display("watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = $urandom; mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 6'($urandom); wdata = $urandom;
      re = $urandom % 2; raddr = 6'($urandom);
      if (re) exp_d = (we && waddr == raddr) ? rdata : mem[raddr];  // old data unless written
      @(posedge clk); #1;
      if (we) mem[waddr] = wdata;
      if (re && !(we && waddr == raddr)) begin
        checks++; if (rdata !== exp_d) begin failures++; $display("read mismatch @%0d", raddr); end
      end
      exp_d = rdata;
      @(negedge clk); re = 0; we = 1; waddr = raddr; wdata = $urandom; mem[waddr] = wdata;
      @(posedge clk); #1; checks++;
      if (rdata !== exp_d) begin failures++; $display("hold failed"); end
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

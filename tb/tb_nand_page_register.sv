// tb_nand_page_register -- self-checking test of nand_page_register.
// Writes a pattern to every word, then reads it back through both read
// ports with different addresses, and checks that we=0 writes nothing.
`timescale 1ns/10ps
module tb_nand_page_register;
  localparam int PB = 64, WORDS = PB / 2, AW = $clog2(WORDS);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr_a = 0, raddr_b = 0;
  logic [15:0] wdata = 0, rdata_a, rdata_b;
  int checks = 0, failures = 0;
  nand_page_register #(.PAGE_BYTES(PB)) dut (.*);
  always #5 clk = ~clk;
  function automatic logic [15:0] f(int i); return 16'(i * 16'h1357 + 16'h0f0f); endfunction
  initial begin
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = f(i);
    end
    @(negedge clk); we = 0; waddr = 3; wdata = 16'hdead;
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      raddr_a = AW'(i); raddr_b = AW'(WORDS - 1 - i); #1;
      checks += 2;
      if (rdata_a != f(i)) failures++;
      if (rdata_b != f(WORDS - 1 - i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_gen_w -- self-checking test of gen_w (RWEB generation).
// Checks that RWEB stays high while idle, gives exactly one low pulse per
// requested cycle, low only during the low phase of CLK, and toggles once
// per CLK period (t_RWC = t_P) for a run of consecutive requests.
`timescale 1ns/10ps
module tb_gen_w;
  logic clk = 0, rst_n = 1, en = 0, rweb;
  int checks = 0, failures = 0, falls = 0;
  gen_w dut (.*);
  always #6 clk = ~clk;
  always @(negedge rweb) falls++;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask

  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    // idle
    repeat (3) begin @(negedge clk); #1 chk(rweb == 1, "idle high (low phase)"); end
    // single pulse
    @(negedge clk); en = 1; @(negedge clk); en = 0;
    falls = 0;
    #1 chk(rweb == 0, "pulse low in low phase");
    @(posedge clk); #1 chk(rweb == 1, "pulse rises with CLK");
    @(negedge clk); #1 chk(rweb == 1, "single pulse only");
    // burst of 10
    falls = 0;
    @(negedge clk); en = 1; repeat (10) @(negedge clk); en = 0;
    #1;
    repeat (3) @(negedge clk);
    chk(falls == 10, "10 RWEB cycles for 10 requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

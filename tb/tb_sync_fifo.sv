// tb_sync_fifo -- self-checking test of sync_fifo.
// Random pushes and pops against a queue reference model; checks data
// order, the full/empty flags and the fill count, and fills the FIFO to
// full once and drains it to empty once.
`timescale 1ns/10ps
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 1, push = 0, pop = 0, full, empty;
  logic [7:0] din = 0, dout;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [7:0] q[$];
  int saw_full = 0, saw_empty = 0;

  sync_fifo #(.WIDTH(8), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask

  initial begin
    #1 rst_n = 0; #12 rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      chk(count == q.size(), "count");
      chk(full == (q.size() == DEPTH), "full");
      chk(empty == (q.size() == 0), "empty");
      if (q.size() > 0) chk(dout == q[0], "data");
      if (full) saw_full++;
      if (empty && i > 10) saw_empty++;
      // phases: fill, drain, random
      if (i < 40)       begin push = !full;  pop = 0; end
      else if (i < 80)  begin push = 0;      pop = !empty; end
      else              begin push = ($urandom_range(0, 1) == 1) && !full; pop = ($urandom_range(0, 1) == 1) && !empty; end
      din = 8'($urandom);
      @(posedge clk);
      #1;
      if (push) q.push_back(din);
      if (pop) void'(q.pop_front());
    end
    chk(saw_full > 0, "reached full");
    chk(saw_empty > 0, "reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

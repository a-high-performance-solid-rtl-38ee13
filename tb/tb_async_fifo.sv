// tb_async_fifo -- self-checking test of async_fifo.
// Write clock and read clock are unrelated (7 ns and 12 ns); random pushes
// (never when full) and pops (never when empty) are compared with a queue
// model. Also checks that empty becomes visible, that full is reached when
// the reader stalls, and that every word written is read back in order.
`timescale 1ns/10ps
module tb_async_fifo;
  localparam int DEPTH = 8;
  logic wclk = 0, rclk = 0, rst_n = 1, push = 0, pop = 0, full, empty;
  logic [7:0] din = 0, dout;
  int checks = 0, failures = 0, nwr = 0, nrd = 0, saw_full = 0;
  logic [7:0] q[$];
  bit stall_reader = 0;

  async_fifo #(.WIDTH(8), .DEPTH(DEPTH)) dut (.wclk, .wrst_n(rst_n), .push, .din, .full,
                                               .rclk, .rrst_n(rst_n), .pop, .dout, .empty);
  always #3.5 wclk = ~wclk;
  always #6   rclk = ~rclk;

  // writer
  initial begin
    #1 rst_n = 0; #20 rst_n = 1;
    while (nwr < 400) begin
      @(negedge wclk);
      push = !full && ($urandom_range(0, 2) != 0);
      din  = 8'(nwr * 3 + 1);
      @(posedge wclk);
      if (full) saw_full++;
      if (push) begin q.push_back(din); nwr++; end
      #0.1 push = 0;
    end
  end
  // reader
  initial begin
    #30;
    while (nrd < 400) begin
      if (nrd == 100 && !stall_reader) begin
        stall_reader = 1;             // once: let the writer fill the FIFO
        repeat (30) @(posedge rclk);
      end
      @(negedge rclk);
      pop = !empty && ($urandom_range(0, 3) != 0);
      if (pop) begin
        checks++;
        if (q.size() == 0 || dout != q[0]) begin
          failures++; $display("FAIL data %h at %t", dout, $time);
        end else void'(q.pop_front());
        nrd++;
      end
      @(posedge rclk);
      #0.1 pop = 0;
    end
    repeat (5) @(posedge rclk);
    checks += 2;
    if (!empty) failures++;
    if (saw_full == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

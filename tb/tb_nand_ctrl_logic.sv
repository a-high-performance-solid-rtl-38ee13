// tb_nand_ctrl_logic -- self-checking test of the flash command state machine.
// Drives RWEB pulses with CEB/CLE/ALE/IO set up while RWEB is high, plays
// the cell array (answers req_tgl after a delay), and checks: the program
// sequence opens data-in, latches the row and requests a program; R/B is
// low until the answer; the read sequence requests a fetch and opens
// data-out only when the fetch is done; a deselected chip ignores commands;
// a command while busy is ignored.
`timescale 1ns/10ps
module tb_nand_ctrl_logic;
  import nand_pkg::*;
  logic rweb = 1, rst_n = 1, ceb = 1, cle = 0, ale = 0, ack_tgl = 0;
  logic [7:0] io = 0;
  logic req_tgl, data_in, data_out, rb;
  op_e req_op;
  logic [15:0] row;
  int checks = 0, failures = 0;

  nand_ctrl_logic dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask
  task automatic cyc(logic c, logic a, logic [7:0] b);
    cle = c; ale = a; io = b; #3 rweb = 0; #6 rweb = 1; #3;
  endtask
  task automatic answer();
    #100 ack_tgl = req_tgl;
  endtask

  initial begin
    logic t0;
    #1 rst_n = 0; #5 rst_n = 1; #5;
    ack_tgl = 0;
    #1;
    chk(rb == 1 && !data_in && !data_out, "idle after reset");
    ceb = 0;
    // program row 0x1234
    cyc(1, 0, CMD_PROG1);
    cyc(0, 1, 8'h00); cyc(0, 1, 8'h00); cyc(0, 1, 8'h34); cyc(0, 1, 8'h12);
    chk(data_in == 1, "data-in open after 4 address bytes");
    chk(row == 16'h1234, "row latched");
    t0 = req_tgl;
    repeat (4) cyc(0, 0, 8'h55);     // data cycles: no effect on state
    chk(data_in == 1, "data-in stays open");
    cyc(1, 0, CMD_PROG2);
    chk(req_tgl != t0 && req_op == OP_PROG, "program requested");
    chk(rb == 0 && !data_in, "busy during program");
    // command while busy is ignored
    t0 = req_tgl;
    cyc(1, 0, CMD_READ1);
    chk(req_tgl == t0 && rb == 0, "ignored while busy");
    answer();
    #1 chk(rb == 1, "ready after program");
    // deselected chip ignores a read command
    ceb = 1;
    cyc(1, 0, CMD_READ1); cyc(0, 1, 0); cyc(0, 1, 0); cyc(0, 1, 8'h07); cyc(0, 1, 0); cyc(1, 0, CMD_READ2);
    chk(req_tgl == t0 && rb == 1, "deselected chip ignores commands");
    ceb = 0;
    // read row 0x0007
    cyc(1, 0, CMD_READ1); cyc(0, 1, 0); cyc(0, 1, 0); cyc(0, 1, 8'h07); cyc(0, 1, 0);
    chk(!data_out && rb, "waiting for confirm");
    cyc(1, 0, CMD_READ2);
    chk(req_tgl != t0 && req_op == OP_READ && row == 16'h0007, "fetch requested");
    chk(rb == 0 && data_out == 0, "busy during fetch, no data-out");
    answer();
    #1 chk(rb == 1 && data_out == 1, "data-out after fetch");
    repeat (3) cyc(0, 0, 8'h00);
    chk(data_out == 1, "data-out held during burst");
    cyc(1, 0, CMD_READ1);
    chk(data_out == 0, "next command closes data-out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

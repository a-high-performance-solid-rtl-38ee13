// tb_nand_cell_array -- self-checking test of the cell array model.
// Programs a page from a testbench page-register model, checks that busy
// lasts t_PROG and ack follows; fetches it into a second model through the
// transfer-clock write port, checks the data and that busy lasts t_R; a
// fetch of a never-programmed page returns erased bytes (FFh).
`timescale 1ns/10ps
module tb_nand_cell_array;
  import nand_pkg::*;
  localparam int PB = 32, WORDS = PB / 2, AW = $clog2(WORDS);
  logic rst_n = 1, req_tgl = 0, ack_tgl, busy, xclk, pr_we;
  op_e req_op = OP_NONE;
  logic [15:0] row = 0, pr_wdata, pr_rdata;
  logic [AW-1:0] pr_waddr, pr_raddr;
  logic [15:0] src [WORDS], dst [WORDS];
  int checks = 0, failures = 0;
  realtime t0;

  nand_cell_array #(.PAGE_BYTES(PB), .PAGES(4), .T_R_NS(1000.0), .T_PROG_NS(5000.0)) dut (.*);
  assign pr_rdata = src[pr_raddr];
  always @(posedge xclk) if (pr_we) dst[pr_waddr] <= pr_wdata;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask

  initial begin
    #1 rst_n = 0; #1 req_tgl = 1; #1 rst_n = 1;    // toggle during reset: ignored
    #10 chk(!busy && ack_tgl == req_tgl, "reset toggle ignored");
    for (int w = 0; w < WORDS; w++) src[w] = 16'($urandom);
    row = 16'd6;                                     // wraps to page 2
    req_op = OP_PROG; t0 = $realtime; req_tgl = ~req_tgl;
    #1 chk(busy, "busy on program");
    #1 wait (!busy);
    chk(($realtime - t0) > 4999.0 && ($realtime - t0) < 5001.0, "t_PROG");
    chk(ack_tgl == req_tgl, "ack after program");
    #10;
    row = 16'd2; req_op = OP_READ; t0 = $realtime; req_tgl = ~req_tgl;
    #1 wait (!busy);
    chk(($realtime - t0) > 999.0 && ($realtime - t0) < 1001.0, "t_R");
    for (int w = 0; w < WORDS; w++) chk(dst[w] == src[w], "fetched data");
    #10;
    row = 16'd1; req_tgl = ~req_tgl;
    #1 wait (!busy);
    for (int w = 0; w < WORDS; w++) chk(dst[w] == 16'hFFFF, "erased page");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_ssd_nand_full -- end-to-end test of ssd_nand_top at its default size.
//
// 4 channels x 4 ways, 2048-byte pages, SLC t_R = 25 us and t_PROG = 200 us:
// every chip programs one page and reads it back. See ssd_tb_body.svh.
`timescale 1ns/10ps
module tb_ssd_nand_full;
  localparam int unsigned CH = 4, WY = 4, PB = 2048, NPG = 8;
  `include "ssd_tb_body.svh"

  ssd_nand_top dut (.*);

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

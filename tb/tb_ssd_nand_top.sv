// tb_ssd_nand_top -- end-to-end test of ssd_nand_top at reduced size.
//
// 2 channels x 4 ways, 64-byte pages, short t_R / t_PROG so that the run is
// quick; the protocol, the DDR bursts and the interleaving are the same as
// at full size. See ssd_tb_body.svh for what is checked.
`timescale 1ns/10ps
module tb_ssd_nand_top;
  localparam int unsigned CH = 2, WY = 4, PB = 64, NPG = 4;
  `include "ssd_tb_body.svh"

  ssd_nand_top #(.CHANNELS(CH), .WAYS(WY), .PAGE_BYTES(PB), .PAGES(NPG),
                 .T_R_NS(2000.0), .T_PROG_NS(8000.0)) dut (.*);

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

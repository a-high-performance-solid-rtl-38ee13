// tb_nand_flash_chip -- pin-level test of one DDR NAND flash chip.
// Programs a page with a DDR burst (one byte per RWEB edge), waits for R/B,
// reads it back: DVS must follow each RWEB edge by t_DLL, and the byte on
// IO at each DVS edge must be the next byte of the page (even bytes at the
// falling, odd at the rising edge). Also checks that R/B stays low for
// t_PROG and t_R, and that a deselected chip neither drives IO nor DVS.
`timescale 1ns/10ps
module tb_nand_flash_chip;
  import nand_pkg::*;
  localparam int PB = 32;
  logic rst_n = 1, rweb = 1, ceb = 1, cle = 0, ale = 0;
  logic [7:0] io_in = 0, io_out;
  logic io_oe, dvs, rb;
  int checks = 0, failures = 0, nrx = 0;
  realtime t_edge, t0;
  logic [7:0] page [PB];

  nand_flash_chip #(.PAGE_BYTES(PB), .PAGES(4), .T_R_NS(1000.0), .T_PROG_NS(3000.0)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask
  task automatic cyc(logic c, logic a, logic [7:0] b);
    cle = c; ale = a; io_in = b; #3 rweb = 0; #6 rweb = 1; #3;
  endtask

  // DVS receiver: sample IO at every DVS edge
  always @(posedge dvs or negedge dvs) if (rst_n && !ceb) begin
    checks++;
    if ($realtime - t_edge < 2.99 || $realtime - t_edge > 3.01) begin
      failures++; $display("FAIL DVS delay %0f", $realtime - t_edge);
    end
    checks++;
    if (io_out !== page[nrx] || !io_oe) begin
      failures++; $display("FAIL byte %0d got %h exp %h", nrx, io_out, page[nrx]);
    end
    nrx++;
  end
  always @(posedge rweb or negedge rweb) t_edge = $realtime;

  initial begin
    #1 rst_n = 0; #5 rst_n = 1; #5;
    for (int i = 0; i < PB; i++) page[i] = 8'($urandom);
    ceb = 0;
    cyc(1, 0, CMD_PROG1); cyc(0, 1, 0); cyc(0, 1, 0); cyc(0, 1, 8'd3); cyc(0, 1, 0);
    cle = 0; ale = 0;
    for (int i = 0; i < PB; i += 2) begin
      io_in = page[i];   #3 rweb = 0; #3;
      io_in = page[i+1]; #3 rweb = 1; #3;
    end
    cyc(1, 0, CMD_PROG2);
    t0 = $realtime;
    chk(rb == 0, "busy after program command");
    wait (rb);
    chk($realtime - t0 > 2980 && $realtime - t0 < 3000, "t_PROG");
    cyc(1, 0, CMD_READ1); cyc(0, 1, 0); cyc(0, 1, 0); cyc(0, 1, 8'd3); cyc(0, 1, 0);
    cyc(1, 0, CMD_READ2);
    t0 = $realtime;
    chk(rb == 0, "busy after read command");
    wait (rb);
    chk($realtime - t0 > 980 && $realtime - t0 < 1000, "t_R");
    cle = 0; ale = 0; #6;
    for (int i = 0; i < PB; i += 2) begin
      #3 rweb = 0; #3; #3 rweb = 1; #3;
    end
    #10;
    chk(nrx == PB, "every byte strobed by DVS");
    // deselected: RWEB toggles must not produce DVS or IO
    ceb = 1; nrx = 0;
    repeat (4) begin #3 rweb = 0; #6 rweb = 1; #3; end
    chk(nrx == 0 && dvs == 1 && io_oe == 0, "deselected chip silent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

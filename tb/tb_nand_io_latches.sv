// tb_nand_io_latches -- self-checking test of the DDR IO latches.
// The page register is a model in the testbench. Data in: 8 byte pairs
// are offered on alternate RWEB edges (IO changed in the middle of each
// phase); each page-register write must carry {odd, even} byte of one pair
// at consecutive addresses, the last one on the falling edge of the closing
// command cycle. Data out: the pad value must be the even byte of word k
// while RWEB is low and the odd byte while RWEB is high, k advancing per
// RWEB period, and IO must be driven only when selected in data-out.
`timescale 1ns/10ps
module tb_nand_io_latches;
  localparam int PB = 32, WORDS = PB / 2, AW = $clog2(WORDS);
  logic rweb = 1, rst_n = 1, sel = 0, data_in = 0, data_out = 0;
  logic [7:0] io = 0, io_out;
  logic io_oe, pr_we;
  logic [AW-1:0] pr_waddr, pr_raddr;
  logic [15:0] pr_wdata, pr_rdata;
  logic [15:0] pmem [WORDS];
  int checks = 0, failures = 0, nwr = 0;

  nand_io_latches #(.PAGE_BYTES(PB)) dut (.*);
  assign pr_rdata = pmem[pr_raddr];

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask

  // page-register model: written on the falling RWEB edge
  always @(negedge rweb) if (pr_we) begin
    chk(pr_waddr == AW'(nwr), "write address");
    chk(pr_wdata == {8'(2*nwr+1 + 8'h40), 8'(2*nwr + 8'h40)}, "write pair");
    nwr++;
  end

  initial begin
    #1 rst_n = 0; #5 rst_n = 1; #5;
    // ---- data in: 8 pairs ----
    data_in = 1; sel = 1;
    for (int k = 0; k < 8; k++) begin
      io = 8'(2*k + 8'h40);     #3 rweb = 0; #3;
      io = 8'(2*k + 1 + 8'h40); #3 rweb = 1; #3;
    end
    chk(nwr == 7, "seven pairs written before the closing command");
    sel = 0;                  // command cycle (CLE high)
    #3 rweb = 0; #6 rweb = 1; #3;
    data_in = 0;
    chk(nwr == 8, "last pair written on the command's falling edge");
    // ---- data out ----
    for (int w = 0; w < WORDS; w++) pmem[w] = 16'(w * 16'h0101 + 16'h2010);
    chk(io_oe == 0, "not driving before data-out");
    data_out = 1; sel = 1; #3;
    chk(io_oe == 1, "driving in data-out");
    for (int k = 0; k < WORDS; k++) begin
      #3 rweb = 0; #1 chk(io_out == pmem[k][7:0], "even byte on falling edge");
      #2;
      #3 rweb = 1; #1 chk(io_out == pmem[k][15:8], "odd byte on rising edge");
      #2;
    end
    sel = 0; #1 chk(io_oe == 0, "released when deselected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #50us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_nand_if -- test of the controller NAND interface of one channel.
// The interface drives two chip models through the board model. Checks:
//  * the command/address bytes on the pins (80h, 4 address bytes, 10h;
//    00h, 4 address bytes, 30h), taken on the rising RWEB edge with CLE/ALE;
//  * DDR rate: a page of PB bytes moves in PB/2 RWEB periods of one CLK
//    each, with no stall, when the host keeps WDATA flowing / accepts RDATA;
//  * way interleaving: the second way's program command is issued while
//    the first way is still busy programming;
//  * read data, its way tag and the last flag; a read with the host holding
//    rd_ready low for a while (read stalls) still returns correct data.
`timescale 1ns/10ps
module tb_nand_if;
  import nand_pkg::*;
  localparam int WY = 2, PB = 64, WORDS = PB / 2;
  logic clk = 0, rst_n = 1;
  bit   live = 0;   // pin monitors count only after reset
  always #6 clk = ~clk;

  logic req_valid = 0, req_ready, req_write = 0;
  logic [0:0] req_way = 0;
  logic [15:0] req_row = 0;
  logic wr_valid = 0, wr_ready;
  logic [15:0] wr_data = 0;
  logic rd_valid, rd_ready = 1, rd_last;
  logic [15:0] rd_data;
  logic [0:0] rd_way;
  logic prog_done;
  logic [0:0] prog_done_way;
  logic evt_wstall, evt_rstall;
  logic rweb, cle, ale, io_oe, dvs;
  logic [WY-1:0] ceb, rb;
  logic [7:0] io_out, io_in;
  logic f_rweb, f_cle, f_ale;
  logic [WY-1:0] f_ceb, f_io_oe, f_dvs, f_rb;
  logic [7:0] f_io;
  logic [7:0] f_io_out [WY];

  nand_if #(.WAYS(WY), .PAGE_BYTES(PB), .FIFO_DEPTH(16)) dut (.*);
  board_channel #(.WAYS(WY)) u_board (
    .c_rweb(rweb), .c_ceb(ceb), .c_cle(cle), .c_ale(ale), .c_io_out(io_out), .c_io_in(io_in),
    .c_dvs(dvs), .c_rb(rb), .f_rweb, .f_ceb, .f_cle, .f_ale, .f_io, .f_io_out, .f_io_oe, .f_dvs, .f_rb);
  for (genvar w = 0; w < WY; w++) begin : g_chip
    nand_flash_chip #(.PAGE_BYTES(PB), .PAGES(4), .T_R_NS(2000.0), .T_PROG_NS(6000.0)) u_chip (
      .rst_n, .rweb(f_rweb), .ceb(f_ceb[w]), .cle(f_cle), .ale(f_ale), .io_in(f_io),
      .io_out(f_io_out[w]), .io_oe(f_io_oe[w]), .dvs(f_dvs[w]), .rb(f_rb[w]));
  end

  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %t", m, $time); end
  endtask
  function automatic logic [15:0] pat(int w, int j);
    return {8'(j * 2 + 1 + w * 40), 8'(j * 2 + w * 40)};
  endfunction

  // ---- pin monitor: command/address bytes and data-cycle timing ----
  logic [7:0] seq [$];
  int ndata = 0, max_ndata = 0;
  realtime t_first, t_last, burst_len [$];
  always @(posedge rweb) if (live && (cle || ale)) begin
    seq.push_back(io_out);
    if (ndata > 0) burst_len.push_back(t_last - t_first);
    if (ndata > max_ndata) max_ndata = ndata;
    ndata = 0;
  end
  always @(negedge rweb) if (live && !cle && !ale) begin
    if (ndata == 0) t_first = $realtime;
    t_last = $realtime;
    ndata++;
  end
  int nwstall = 0, nrstall = 0;
  always @(posedge clk) begin
    if (evt_wstall) nwstall++;
    if (evt_rstall) nrstall++;
  end
  realtime t_prog0_done = 0, t_cmd_w1 = 0;
  always @(posedge clk) if (prog_done && prog_done_way == 0 && t_prog0_done == 0) t_prog0_done = $realtime;

  task automatic request(bit wr, int w, int row);
    bit took;
    @(negedge clk);
    req_valid = 1; req_write = wr; req_way = 1'(w); req_row = 16'(row);
    do begin #1 took = req_ready; @(posedge clk); @(negedge clk); end while (!took);
    req_valid = 0;
  endtask
  task automatic push_page(int w);
    @(negedge clk);
    for (int j = 0; j < WORDS; j++) begin
      bit took;
      wr_valid = 1; wr_data = pat(w, j);
      // wr_ready is sampled before the edge that would take the word
      do begin took = wr_ready; @(posedge clk); @(negedge clk); end while (!took);
    end
    wr_valid = 0;
  endtask
  task automatic read_page(int w, bit slow);
    int j = 0, n = 0;
    bit fire, lst;
    logic [15:0] dat;
    logic tag;
    while (j < WORDS) begin
      @(negedge clk);
      rd_ready = slow ? (n % 8 < 2) : 1'b1;
      n++;
      #1 fire = rd_valid && rd_ready;
      dat = rd_data; tag = rd_way; lst = rd_last;
      @(posedge clk);
      if (fire) begin
        chk(dat == pat(w, j), "read data");
        chk(tag == 1'(w), "read way tag");
        chk(lst == (j == WORDS - 1), "last flag");
        j++;
      end
    end
    @(negedge clk) rd_ready = 1;
  endtask

  initial begin
    int nst;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1; live = 1;
    // preload 16 words of way 0's page, then request: burst must not stall
    fork
      push_page(0);
      begin repeat (20) @(posedge clk); request(1, 0, 1); end
    join
    nst = nwstall;
    chk(nst == 0, "no write stall while host keeps up");
    // way 1 write, issued while way 0 programs
    fork
      push_page(1);
      begin request(1, 1, 2); t_cmd_w1 = $realtime; end
    join
    wait (prog_done && prog_done_way == 1);
    chk(t_prog0_done == 0 || t_prog0_done > t_cmd_w1, "way 1 issued while way 0 busy (interleaving)");
    wait (t_prog0_done != 0);
    // command bytes of the two programs
    chk(seq.size() >= 12, "command count");
    chk(seq[0] == CMD_PROG1 && seq[3] == 8'd1 && seq[5] == CMD_PROG2, "program sequence way 0");
    chk(seq[6] == CMD_PROG1 && seq[9] == 8'd2 && seq[11] == CMD_PROG2, "program sequence way 1");
    chk(burst_len.size() == 2, "two data bursts");
    foreach (burst_len[i])
      chk(burst_len[i] > (WORDS - 1) * 12.0 - 0.1 && burst_len[i] < (WORDS - 1) * 12.0 + 0.1,
          "DDR write: PB bytes in PB/2 CLK periods");
    chk(max_ndata == WORDS, "PB/2 RWEB periods per page");
    // read both pages back: way 1 fast, way 0 with host back-pressure
    request(0, 1, 2);
    request(0, 0, 1);
    chk(seq[12] == CMD_READ1 && seq[15] == 8'd2 && seq[17] == CMD_READ2, "read sequence");
    read_page(1, 0);
    chk(nrstall == 0, "no read stall while host accepts");
    read_page(0, 1);
    chk(nrstall > 0, "read stalls under back-pressure");
    chk(max_ndata == WORDS, "PB/2 RWEB periods per read page");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #500us; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

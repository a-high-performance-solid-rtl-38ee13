// ssd_tb_body.svh -- body shared by the end-to-end testbenches of ssd_nand_top.
//
// The including module defines CH, WY, PB (page bytes), NPG (pages per
// chip), and instantiates the DUT as 'dut' (or leaves its parameters at
// their defaults for the full-size run). Per channel, one process writes a
// page to every way (pages are programmed concurrently: way interleaving),
// waits for all programs, then reads every page back with random host-side
// back-pressure and compares each 16-bit word with the pattern. Channels run
// in parallel (channel striping). Counted mechanisms: DDR write bursts, DDR
// read bursts, write stalls (WFIFO empty), read stalls (no RFIFO credit or
// host not ready), cycles with two or more chips of one channel busy, cycles
// with two or more channels moving data. Each must occur at least once.
localparam int unsigned WWB = (WY > 1) ? $clog2(WY) : 1;
localparam int unsigned WORDS = PB / 2;

logic clk = 1'b0;
logic rst_n = 1'b1;   // falls at 1 ns so that every asynchronous reset sees an edge
always #6 clk = ~clk;   // t_P = 12 ns

logic           req_valid [CH], req_ready [CH], req_write [CH];
logic [WWB-1:0] req_way   [CH];
logic [15:0]    req_row   [CH];
logic           wr_valid  [CH], wr_ready [CH];
logic [15:0]    wr_data   [CH];
logic           rd_valid  [CH], rd_ready [CH], rd_last [CH];
logic [15:0]    rd_data   [CH];
logic [WWB-1:0] rd_way    [CH];
logic           prog_done [CH];
logic [WWB-1:0] prog_done_way [CH];
logic           evt_wstall [CH], evt_rstall [CH];

int checks = 0, failures = 0;
int n_wburst = 0, n_rburst = 0, n_wstall = 0, n_rstall = 0, n_interleave = 0, n_stripe = 0;
int busy_ways [CH];
int moving;
logic chan_done [CH];

function automatic logic [7:0] pat(int c, int w, int row, int i);
  return 8'((i * 7) + (c * 31) + (w * 13) + (row * 5) + (i >> 8) * 3);
endfunction

// mechanism monitors
always @(posedge clk) if (rst_n) begin
  moving = 0;
  for (int c = 0; c < int'(CH); c++) begin
    if (evt_wstall[c]) n_wstall++;
    if (evt_rstall[c]) n_rstall++;
    if (busy_ways[c] >= 2) n_interleave++;
    if ((wr_valid[c] && wr_ready[c]) || (rd_valid[c] && rd_ready[c])) moving++;
  end
  if (moving >= 2) n_stripe++;
end

task automatic run_channel(int c);
  int done_cnt;
  int row;
  bit took;
  // ---- program one page per way ----
  for (int w = 0; w < int'(WY); w++) begin
    row = (w + c) % int'(NPG);
    @(negedge clk);
    req_valid[c] = 1'b1; req_write[c] = 1'b1; req_way[c] = WWB'(w); req_row[c] = 16'(row);
    // handshakes are sampled mid-cycle, before the edge that completes them
    do begin #1 took = req_ready[c]; @(posedge clk); @(negedge clk); end while (!took);
    req_valid[c] = 1'b0;
    busy_ways[c]++;
    n_wburst++;
    for (int j = 0; j < int'(WORDS); j++) begin
      // occasional host gap -> WFIFO runs empty -> write stall
      if ($urandom_range(0, 15) == 0) begin
        wr_valid[c] = 1'b0;
        repeat (20) @(negedge clk);
      end
      wr_valid[c] = 1'b1;
      wr_data[c]  = {pat(c, w, row, 2*j+1), pat(c, w, row, 2*j)};
      do begin #1 took = wr_ready[c]; @(posedge clk); @(negedge clk); end while (!took);
    end
    wr_valid[c] = 1'b0;
  end
  done_cnt = 0;
  while (done_cnt < int'(WY)) begin
    @(posedge clk);
    if (prog_done[c]) begin
      done_cnt++;
      busy_ways[c]--;
    end
  end
  // ---- read every page back ----
  for (int w = 0; w < int'(WY); w++) begin
    row = (w + c) % int'(NPG);
    @(negedge clk);
    req_valid[c] = 1'b1; req_write[c] = 1'b0; req_way[c] = WWB'(w); req_row[c] = 16'(row);
    // handshakes are sampled mid-cycle, before the edge that completes them
    do begin #1 took = req_ready[c]; @(posedge clk); @(negedge clk); end while (!took);
    req_valid[c] = 1'b0;
    busy_ways[c]++;
  end
  chan_done[c] = 1'b1;
endtask

// read data checker, one per channel
task automatic check_reads(int c);
  int wcnt [WY];
  int got = 0;
  int row, w;
  bit fire, lst;
  logic [15:0] dat;
  logic [WWB-1:0] tag;
  for (int i = 0; i < int'(WY); i++) wcnt[i] = 0;
  while (got < int'(WY * WORDS)) begin
    @(negedge clk);
    rd_ready[c] = ($urandom_range(0, 7) != 0);
    #1 fire = rd_valid[c] && rd_ready[c];
    dat = rd_data[c]; lst = rd_last[c]; tag = rd_way[c];
    @(posedge clk);
    if (fire) begin
      w   = int'(tag);
      row = (w + c) % int'(NPG);
      checks++;
      if (dat !== {pat(c, w, row, 2*wcnt[w]+1), pat(c, w, row, 2*wcnt[w])}) begin
        failures++;
        if (failures < 100000)
          $display("MISMATCH ch%0d way%0d word%0d got %h exp %h", c, w, wcnt[w], dat,
                   {pat(c, w, row, 2*wcnt[w]+1), pat(c, w, row, 2*wcnt[w])});
      end
      if (lst != (wcnt[w] == int'(WORDS) - 1)) failures++;
      if (lst) begin
        n_rburst++;
        busy_ways[c]--;
      end
      wcnt[w]++;
      got++;
    end
  end
endtask

initial begin
  for (int c = 0; c < int'(CH); c++) begin
    req_valid[c] = 0; req_write[c] = 0; req_way[c] = '0; req_row[c] = '0;
    wr_valid[c] = 0; wr_data[c] = '0; rd_ready[c] = 1; busy_ways[c] = 0; chan_done[c] = 0;
  end
  #1 rst_n = 1'b0;
  repeat (3) @(posedge clk);
  rst_n = 1'b1;
  repeat (3) @(posedge clk);
  for (int c = 0; c < int'(CH); c++) begin
    automatic int cc = c;
    fork
      run_channel(cc);
      check_reads(cc);
    join_none
  end
  wait fork;
  repeat (10) @(posedge clk);
  $display("mechanisms: ddr_write_bursts=%0d ddr_read_bursts=%0d write_stall_cycles=%0d read_stall_cycles=%0d interleaved_cycles=%0d striped_cycles=%0d",
           n_wburst, n_rburst, n_wstall, n_rstall, n_interleave, n_stripe);
  checks += 6;
  if (n_wburst != int'(CH * WY)) failures++;
  if (n_rburst != int'(CH * WY)) failures++;
  if (n_wstall == 0) failures++;
  if (n_rstall == 0) failures++;
  if (n_interleave == 0) failures++;
  if (CH > 1 && n_stripe == 0) failures++;
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

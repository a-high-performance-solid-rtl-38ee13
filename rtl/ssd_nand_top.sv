// ssd_nand_top -- NAND side of a multi-channel, way-interleaved DDR SSD.
//
// CHANNELS independent channels (channel striping). Each channel has one
// controller NAND interface (nand_if), the board wiring (board_channel) and
// WAYS flash chips (nand_flash_chip) that share the channel's RWEB, CLE, ALE,
// IO and DVS wires and each have their own CEB and R/B (way interleaving).
// The default 4 channels x 4 ways is the example organisation of the
// paper's multi-channel block diagram. The processor, RAM, ROM, host and
// DRAM interfaces and the ECC blocks of a full controller are not part of
// this design: the per-channel request, write-data, read-data and
// completion streams of nand_if are brought out as ports (arrays indexed by
// channel) for them to attach to. All channels run on one CLK (t_P = 12 ns).
`timescale 1ns/10ps
module ssd_nand_top
  import nand_pkg::*;
#(
  parameter int unsigned CHANNELS   = 4,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned PAGE_BYTES = 2048,
  parameter int unsigned PAGES      = 8,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter real         T_R_NS     = T_R_SLC_NS,
  parameter real         T_PROG_NS  = T_PROG_SLC_NS,
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid     [CHANNELS],
  output logic          req_ready     [CHANNELS],
  input  logic          req_write     [CHANNELS],
  input  logic [WW-1:0] req_way       [CHANNELS],
  input  logic [15:0]   req_row       [CHANNELS],
  input  logic          wr_valid      [CHANNELS],
  output logic          wr_ready      [CHANNELS],
  input  logic [15:0]   wr_data       [CHANNELS],
  output logic          rd_valid      [CHANNELS],
  input  logic          rd_ready      [CHANNELS],
  output logic [15:0]   rd_data       [CHANNELS],
  output logic [WW-1:0] rd_way        [CHANNELS],
  output logic          rd_last       [CHANNELS],
  output logic          prog_done     [CHANNELS],
  output logic [WW-1:0] prog_done_way [CHANNELS],
  output logic          evt_wstall    [CHANNELS],
  output logic          evt_rstall    [CHANNELS]
);
  for (genvar c = 0; c < int'(CHANNELS); c++) begin : g_ch
    logic            c_rweb, c_cle, c_ale, c_dvs, io_oe;
    logic [WAYS-1:0] c_ceb, c_rb;
    logic [7:0]      c_io_out, c_io_in;
    logic            f_rweb, f_cle, f_ale;
    logic [WAYS-1:0] f_ceb, f_io_oe, f_dvs, f_rb;
    logic [7:0]      f_io;
    logic [7:0]      f_io_out [WAYS];

    nand_if #(.WAYS(WAYS), .PAGE_BYTES(PAGE_BYTES), .FIFO_DEPTH(FIFO_DEPTH)) u_if (
      .clk, .rst_n,
      .req_valid(req_valid[c]), .req_ready(req_ready[c]), .req_write(req_write[c]),
      .req_way(req_way[c]), .req_row(req_row[c]),
      .wr_valid(wr_valid[c]), .wr_ready(wr_ready[c]), .wr_data(wr_data[c]),
      .rd_valid(rd_valid[c]), .rd_ready(rd_ready[c]), .rd_data(rd_data[c]),
      .rd_way(rd_way[c]), .rd_last(rd_last[c]),
      .prog_done(prog_done[c]), .prog_done_way(prog_done_way[c]),
      .evt_wstall(evt_wstall[c]), .evt_rstall(evt_rstall[c]),
      .rweb(c_rweb), .ceb(c_ceb), .cle(c_cle), .ale(c_ale),
      .io_out(c_io_out), .io_oe, .io_in(c_io_in), .dvs(c_dvs), .rb(c_rb));

    board_channel #(.WAYS(WAYS)) u_board (
      .c_rweb, .c_ceb, .c_cle, .c_ale, .c_io_out, .c_io_in, .c_dvs, .c_rb,
      .f_rweb, .f_ceb, .f_cle, .f_ale, .f_io, .f_io_out, .f_io_oe, .f_dvs, .f_rb);

    for (genvar w = 0; w < int'(WAYS); w++) begin : g_way
      nand_flash_chip #(.PAGE_BYTES(PAGE_BYTES), .PAGES(PAGES),
                        .T_R_NS(T_R_NS), .T_PROG_NS(T_PROG_NS)) u_chip (
        .rst_n, .rweb(f_rweb), .ceb(f_ceb[w]), .cle(f_cle), .ale(f_ale),
        .io_in(f_io), .io_out(f_io_out[w]), .io_oe(f_io_oe[w]),
        .dvs(f_dvs[w]), .rb(f_rb[w]));
    end
  end
endmodule

// nand_flash_chip -- one NAND flash chip with the double-data-rate interface.
//
// Ties together the command logic, the duplicated IO latches, the page
// register, the cell array model and the DLL, as drawn in the paper's block
// diagram of the proposed interface. The chip has no clock of its own on
// the interface side: commands, addresses and data are latched by RWEB
// edges (commands/addresses on the rising edge, data on both edges), and in
// the read mode the chip returns DVS, RWEB delayed by the DLL. The page
// register's write clock is RWEB (inverted, so pairs are written on the
// falling edge) while the chip is ready and the array's transfer clock
// while it is busy; both idle at the level that makes the switch edge-free.
// It is a behavioural model because the cell array and the DLL are; the
// control logic, latches and page register are synthesizable RTL.
`timescale 1ns/10ps
module nand_flash_chip
  import nand_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 2048,
  parameter int unsigned PAGES      = 8,
  parameter real         T_R_NS     = T_R_SLC_NS,
  parameter real         T_PROG_NS  = T_PROG_SLC_NS,
  parameter real         T_DLL      = T_DLL_NS,
  localparam int unsigned AW = $clog2(PAGE_BYTES / 2)
) (
  input  logic       rst_n,
  input  logic       rweb,
  input  logic       ceb,
  input  logic       cle,
  input  logic       ale,
  input  logic [7:0] io_in,
  output logic [7:0] io_out,
  output logic       io_oe,
  output logic       dvs,
  output logic       rb
);
  logic          req_tgl, ack_tgl, busy, data_in, data_out, sel;
  op_e           req_op;
  logic [15:0]   row;
  logic          xclk, a_we, l_we, pr_clk, pr_we;
  logic [AW-1:0] a_waddr, a_raddr, l_waddr, l_raddr, pr_waddr;
  logic [15:0]   a_wdata, l_wdata, pr_wdata, rdata_a, rdata_b;

  assign sel = !ceb && !cle && !ale;

  nand_ctrl_logic #(.ROW_BITS(16)) u_ctrl (
    .rweb, .rst_n, .ceb, .cle, .ale, .io(io_in),
    .req_tgl, .req_op, .row, .ack_tgl, .data_in, .data_out, .rb);

  nand_io_latches #(.PAGE_BYTES(PAGE_BYTES)) u_lat (
    .rweb, .rst_n, .sel, .data_in, .data_out, .io(io_in),
    .pr_we(l_we), .pr_waddr(l_waddr), .pr_wdata(l_wdata),
    .pr_raddr(l_raddr), .pr_rdata(rdata_a), .io_out, .io_oe);

  // page register write port: IO latches when ready, cell array when busy
  assign pr_clk   = busy ? xclk     : ~rweb;
  assign pr_we    = busy ? a_we     : l_we;
  assign pr_waddr = busy ? a_waddr  : l_waddr;
  assign pr_wdata = busy ? a_wdata  : l_wdata;

  nand_page_register #(.PAGE_BYTES(PAGE_BYTES)) u_pr (
    .clk(pr_clk), .we(pr_we), .waddr(pr_waddr), .wdata(pr_wdata),
    .raddr_a(l_raddr), .rdata_a, .raddr_b(a_raddr), .rdata_b);

  nand_cell_array #(.PAGE_BYTES(PAGE_BYTES), .PAGES(PAGES),
                    .T_R_NS(T_R_NS), .T_PROG_NS(T_PROG_NS)) u_arr (
    .rst_n, .req_tgl, .req_op, .row, .ack_tgl, .busy, .xclk,
    .pr_we(a_we), .pr_waddr(a_waddr), .pr_wdata(a_wdata),
    .pr_raddr(a_raddr), .pr_rdata(rdata_b));

  dll #(.T_DLL_NS(T_DLL)) u_dll (.rweb, .en(sel && data_out), .dvs);
endmodule

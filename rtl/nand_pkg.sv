// nand_pkg -- constants shared by the DDR NAND flash interface.
//
// Holds the NAND command bytes, the number of address cycles, the page
// geometry defaults and the interface timing constants (in ns). The clock
// period (12 ns, 83 MHz) and t_BYTE (12 ns) follow the paper's timing
// analysis; the command codes, address-cycle count, page size and the
// cell-array times t_R/t_PROG are common NAND datasheet values chosen for
// this design, since the paper does not print them.
`timescale 1ns/10ps
package nand_pkg;

  // Command bytes (standard NAND page read / page program sequences).
  localparam logic [7:0] CMD_READ1 = 8'h00;  // read, first cycle
  localparam logic [7:0] CMD_READ2 = 8'h30;  // read, confirm -> t_R busy
  localparam logic [7:0] CMD_PROG1 = 8'h80;  // program, first cycle
  localparam logic [7:0] CMD_PROG2 = 8'h10;  // program, confirm -> t_PROG busy

  // Two column bytes then two row bytes.
  localparam int unsigned ADDR_CYCLES = 4;

  // Default page size in bytes (data area only).
  localparam int unsigned PAGE_BYTES_DEF = 2048;

  // Interface timing (ns).
  localparam real T_P_NS      = 12.0;  // CLK period = t_RWC
  localparam real T_BYTE_NS   = 12.0;  // page register <-> latch transfer
  // Cell-array times, SLC and MLC.
  localparam real T_R_SLC_NS    = 25000.0;
  localparam real T_PROG_SLC_NS = 200000.0;
  localparam real T_R_MLC_NS    = 60000.0;
  localparam real T_PROG_MLC_NS = 800000.0;

  // Pad / board / DLL delays used by the behavioural models (ns).
  localparam real T_IOD_NS   = 2.0;  // RLAT to flash IO pad
  localparam real T_IOS_NS   = 1.0;  // setup of IO to DVS at the controller
  localparam real T_RWEBD_NS = 0.0;  // RWEB pad to DLL
  // Eq. (2): t_DLL = t_IOD,max - t_RWEBD,min + t_IOS
  localparam real T_DLL_NS   = T_IOD_NS - T_RWEBD_NS + T_IOS_NS;

  typedef enum logic [1:0] {OP_NONE, OP_READ, OP_PROG} op_e;

endpackage

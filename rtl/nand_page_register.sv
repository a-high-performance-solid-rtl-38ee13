// nand_page_register -- the page register of a NAND flash chip.
//
// Holds one page between the cell array and the IO latches. It is organised
// as PAGE_BYTES/2 words of 16 bits, so that the two bytes a DDR strobe
// period carries (one per RWEB edge) move between the latches and the
// register in one transfer of t_BYTE = one clock period. One synchronous
// write port (rising edge of clk) and two combinational read ports: port A
// for the IO latches, port B for the cell array during a program. The
// caller selects the write clock: RWEB while the chip is ready, the cell
// array's transfer clock while it is busy. The width split is this design's
// choice; the page size is a common datasheet value, not the paper's.
`timescale 1ns/10ps
module nand_page_register #(
  parameter int unsigned PAGE_BYTES = 2048,
  localparam int unsigned WORDS = PAGE_BYTES / 2,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [15:0]   wdata,
  input  logic [AW-1:0] raddr_a,
  output logic [15:0]   rdata_a,
  input  logic [AW-1:0] raddr_b,
  output logic [15:0]   rdata_b
);
  logic [15:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule

// nand_io_latches -- double-data-rate IO latches of a NAND flash chip.
//
// The conventional chip has one write latch (WLAT) and one read latch
// (RLAT); the DDR chip has two of each, one per RWEB edge, and multiplexers
// that pick the latch by the edge type.
//   Data in : WLAT0 takes the IO byte on the falling RWEB edge, WLAT1 on the
//             rising edge. The completed pair is written to the page
//             register (16-bit word at wptr) on the following falling edge,
//             or on the falling edge of the program command that ends the
//             burst.
//   Data out: RLAT0 is the low byte of the page-register word at rptr,
//             RLAT1 a register loaded with the high byte on the falling
//             edge; rptr advances on the rising edge. The output MUX drives
//             RLAT0 while RWEB is low and RLAT1 while RWEB is high, so one
//             byte leaves on each RWEB edge, and each latch only changes
//             while the MUX shows the other one.
// 'sel' = chip selected and neither CLE nor ALE high (a data cycle). The
// even-byte/falling-edge pairing and the 16-bit page-register word are this
// design's choices; the duplicated latches and the edge MUX are the paper's.
`timescale 1ns/10ps
module nand_io_latches #(
  parameter int unsigned PAGE_BYTES = 2048,
  localparam int unsigned AW = $clog2(PAGE_BYTES / 2)
) (
  input  logic          rweb,
  input  logic          rst_n,
  input  logic          sel,        // data cycle for this chip
  input  logic          data_in,
  input  logic          data_out,
  input  logic [7:0]    io,
  // page register
  output logic          pr_we,
  output logic [AW-1:0] pr_waddr,
  output logic [15:0]   pr_wdata,
  output logic [AW-1:0] pr_raddr,
  input  logic [15:0]   pr_rdata,
  // pads
  output logic [7:0]    io_out,
  output logic          io_oe
);
  logic [7:0]    wlat0, wlat1, rlat0, rlat1;
  logic [AW-1:0] wptr, rptr;
  logic          have0;          // WLAT0 holds a byte of the current pair
  logic          pend_set, pend_clr;
  logic          pend;           // a full WLAT pair waits for the page register

  assign pend = pend_set ^ pend_clr;

  // falling edge: WLAT0, page-register write of the previous pair, RLAT1
  always_ff @(negedge rweb or negedge rst_n) begin
    if (!rst_n) begin
      wlat0    <= '0;
      wptr     <= '0;
      pend_clr <= 1'b0;
      have0    <= 1'b0;
      rlat1    <= '0;
    end else begin
      if (pend) begin
        pend_clr <= ~pend_clr;
        wptr     <= wptr + 1'b1;
      end else if (!data_in) begin
        wptr <= '0;
      end
      if (sel && data_in) begin
        wlat0 <= io;
        have0 <= 1'b1;
      end else if (!data_in) begin
        have0 <= 1'b0;
      end
      if (sel && data_out) rlat1 <= pr_rdata[15:8];
    end
  end

  // rising edge: WLAT1, read pointer
  always_ff @(posedge rweb or negedge rst_n) begin
    if (!rst_n) begin
      wlat1    <= '0;
      pend_set <= 1'b0;
      rptr     <= '0;
    end else begin
      if (sel && data_in && have0) begin
        wlat1    <= io;
        pend_set <= ~pend_set;
      end
      if (!data_out)  rptr <= '0;
      else if (sel)   rptr <= rptr + 1'b1;
    end
  end

  assign pr_we    = pend;
  assign pr_waddr = wptr;
  assign pr_wdata = {wlat1, wlat0};
  assign pr_raddr = rptr;
  assign rlat0    = pr_rdata[7:0];

  // output MUX selected by the RWEB level
  assign io_out = rweb ? rlat1 : rlat0;
  assign io_oe  = sel && data_out;
endmodule

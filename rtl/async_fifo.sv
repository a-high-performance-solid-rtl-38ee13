// async_fifo -- dual-clock FIFO used as RFIFO0 / RFIFO1 of the NAND interface.
//
// In the DDR read mode the flash chip returns a data strobe, DVS, with the
// data; RFIFO0 is written on one DVS edge and RFIFO1 on the other, and both
// are read in the controller's CLK domain. DVS only toggles during a burst,
// so the two sides are unrelated clocks. The FIFO uses binary pointers with
// Gray-coded copies that are passed through two-flop synchronisers: the
// write side sees a (pessimistic) full flag, the read side a (pessimistic)
// empty flag. Write on the rising edge of wclk (the caller inverts DVS for
// the falling-edge FIFO), read on the rising edge of rclk, first-word
// fall-through on dout. The crossing scheme and the depth are this design's
// choice; the paper only names the FIFOs and their clocks.
`timescale 1ns/10ps
module async_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic [AW:0] wbin_nx;
  assign wbin_nx = wbin + (AW+1)'(push && !full);
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wclk) begin
    if (push && !full) mem[wbin[AW-1:0]] <= din;
  end

  // ---------------- read side ----------------
  logic [AW:0] rbin_nx;
  assign rbin_nx = rbin + (AW+1)'(pop && !empty);
  assign empty = (rgray == wgray_r2);
  assign dout  = mem[rbin[AW-1:0]];

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assert property (@(posedge wclk) disable iff (!wrst_n) !(push && full))
    else $error("async_fifo: push while full (data lost)");
  assert property (@(posedge rclk) disable iff (!rrst_n) !(pop && empty))
    else $error("async_fifo: pop while empty");
endmodule

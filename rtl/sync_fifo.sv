// sync_fifo -- single-clock FIFO used as WFIFO0 / WFIFO1 of the NAND interface.
//
// The controller keeps two write FIFOs: WFIFO0 holds the bytes sent on one
// RWEB edge and WFIFO1 the bytes sent on the other, so that the host side can
// supply two bytes per CLK period for a double-data-rate burst. This block is
// a plain circular buffer: push and pop on the rising edge of clk, a
// registered fill count, first-word fall-through on dout. A push when full
// or a pop when empty is a protocol error and is asserted against. The depth
// is this design's choice; the paper does not size the FIFOs.
`timescale 1ns/10ps
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign full  = (count == ($clog2(DEPTH)+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) begin
        wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (pop && !empty) begin
        rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      end
      count <= count + ($clog2(DEPTH)+1)'(push && !full) - ($clog2(DEPTH)+1)'(pop && !empty);
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
endmodule

// gen_w -- RWEB strobe generator of the controller's NAND interface.
//
// RWEB (the old write-enable bar, now used for reads as well) is derived
// from CLK so that one RWEB period equals one CLK period. A flip-flop
// registers the request 'en' on the rising CLK edge; the gate
// RWEB = CLK | ~en_q then pulls RWEB low for the low phase of CLK and lets it
// rise with the next rising CLK edge. Requesting one cycle gives one low
// pulse (a command or address byte, latched by the flash on the rising
// edge); requesting consecutive cycles makes RWEB toggle at the CLK rate,
// which is the double-data-rate data strobe (a byte on each edge). RWEB
// stays high when idle. Because en_q only changes while CLK is high the gate
// cannot glitch. The flop-plus-gate structure is this design's choice; the
// paper only shows a flip-flop feeding a Gen_W block.
`timescale 1ns/10ps
module gen_w (
  input  logic clk,
  input  logic rst_n,
  input  logic en,     // request an RWEB cycle for the coming CLK period
  output logic rweb
);
  logic en_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) en_q <= 1'b0;
    else        en_q <= en;
  end

  assign rweb = clk | ~en_q;
endmodule

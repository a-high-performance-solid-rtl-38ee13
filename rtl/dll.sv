// dll -- behavioural model of the flash chip's delay-locked loop (DVS source).
//
// BEHAVIOURAL MODEL: a DLL is a mixed-signal circuit; here it is a fixed
// delay. In the DDR read mode the chip sends a data strobe, DVS,
// back to the controller together with the data. DVS is RWEB delayed by
// t_DLL = t_IOD,max - t_RWEBD,min + t_IOS, so that each DVS edge reaches the
// controller t_IOS after the byte launched by the matching RWEB edge is
// stable. While 'en' is low the strobe is held high (the idle level), and
// the gating is applied before the delay so that the edge belonging to the
// last byte of a burst is still delivered after en drops. Several chips share
// the DVS wire; a disabled chip outputs 1 and the board ANDs them.
`timescale 1ns/10ps
module dll #(
  parameter real T_DLL_NS = 3.0
) (
  input  logic rweb,
  input  logic en,
  output logic dvs
);
  logic gated;
  assign gated = rweb | ~en;

  assign #(T_DLL_NS) dvs = gated;
endmodule

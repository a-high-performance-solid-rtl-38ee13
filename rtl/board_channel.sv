// board_channel -- behavioural model of the pads and board wiring of one channel.
//
// BEHAVIOURAL MODEL: pads and PCB traces are analog; here they are delayed
// continuous assignments (inertial: zero-width glitches are not passed on). One controller drives RWEB, CEB[WAYS], CLE, ALE and IO to the
// WAYS chips that share the channel; the chips return IO, DVS and R/B.
//   controller -> chips : RWEB after D_STROBE_NS, CEB/CLE/ALE/IO after
//                         D_IO_NS (> D_STROBE_NS, so an RWEB edge meets the
//                         byte sent in the previous half period)
//   chips -> controller : IO after T_IOD_NS + D_IO_RD_NS, DVS after D_DVS_NS,
//                         R/B after D_IO_NS
// The chip that is not driving the shared IO outputs 0 and is ORed out; a
// chip not sending data holds DVS high and the board ANDs the DVS outputs.
// With the chip's DLL delay (3 ns = T_IOD_NS + D_IO_RD_NS) the default DVS
// board delay makes DVS arrive t_DIFF = 4.69 ns after IO at the controller,
// the difference the paper measured for its board.
`timescale 1ns/10ps
module board_channel #(
  parameter int unsigned WAYS       = 4,
  parameter real         D_STROBE_NS = 1.0,
  parameter real         D_IO_NS     = 2.0,
  parameter real         T_IOD_NS    = 2.0,
  parameter real         D_IO_RD_NS  = 1.0,
  parameter real         D_DVS_NS    = 4.69
) (
  // controller side
  input  logic            c_rweb,
  input  logic [WAYS-1:0] c_ceb,
  input  logic            c_cle,
  input  logic            c_ale,
  input  logic [7:0]      c_io_out,
  output logic [7:0]      c_io_in,
  output logic            c_dvs,
  output logic [WAYS-1:0] c_rb,
  // chip side
  output logic            f_rweb,
  output logic [WAYS-1:0] f_ceb,
  output logic            f_cle,
  output logic            f_ale,
  output logic [7:0]      f_io,
  input  logic [7:0]      f_io_out [WAYS],
  input  logic [WAYS-1:0] f_io_oe,
  input  logic [WAYS-1:0] f_dvs,
  input  logic [WAYS-1:0] f_rb
);
  logic [7:0] io_merged;
  logic       dvs_merged;

  always_comb begin
    io_merged = '0;
    for (int w = 0; w < int'(WAYS); w++)
      if (f_io_oe[w]) io_merged |= f_io_out[w];
  end
  assign dvs_merged = &f_dvs;

  assign #(D_STROBE_NS)           f_rweb  = c_rweb;
  assign #(D_IO_NS)               f_ceb   = c_ceb;
  assign #(D_IO_NS)               f_cle   = c_cle;
  assign #(D_IO_NS)               f_ale   = c_ale;
  assign #(D_IO_NS)               f_io    = c_io_out;
  assign #(T_IOD_NS + D_IO_RD_NS) c_io_in = io_merged;
  assign #(D_DVS_NS)              c_dvs   = dvs_merged;
  assign #(D_IO_NS)               c_rb    = f_rb;
endmodule

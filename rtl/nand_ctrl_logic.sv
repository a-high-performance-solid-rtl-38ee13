// nand_ctrl_logic -- command state machine of a DDR NAND flash chip.
//
// Clocked by the rising edge of RWEB, it latches command bytes (CLE high)
// and address bytes (ALE high) while the chip is selected (CEB low), and
// steps through the two page operations:
//   program: 80h, 4 address bytes, DDR data-in burst, 10h -> t_PROG busy
//   read   : 00h, 4 address bytes, 30h -> t_R busy -> DDR data-out burst
// The address is two column bytes (ignored: whole pages) and two row bytes.
// A fetch or program is requested from the cell array by toggling req_tgl;
// the array toggles ack_tgl back when done. Ready/busy (rb, high = ready) is
// low from the confirm command until the array answers. data_in / data_out
// tell the IO latches which DDR phase is open; data-out opens when the
// fetch has finished and stays open until the next command to this chip.
// The paper only says that the control logic 'manages the interface with
// the controller'; the command codes and address format are the common
// NAND ones and are this design's choice.
`timescale 1ns/10ps
module nand_ctrl_logic
  import nand_pkg::*;
#(
  parameter int unsigned ROW_BITS = 16
) (
  input  logic                rweb,
  input  logic                rst_n,
  input  logic                ceb,
  input  logic                cle,
  input  logic                ale,
  input  logic [7:0]          io,
  // cell array handshake
  output logic                req_tgl,
  output op_e                 req_op,
  output logic [ROW_BITS-1:0] row,
  input  logic                ack_tgl,
  // phase flags for the IO latches
  output logic                data_in,
  output logic                data_out,
  output logic                rb
);
  typedef enum logic [2:0] {
    ST_IDLE, ST_ADDR, ST_WAIT_CONF, ST_DATA_IN, ST_BUSY_PROG, ST_READ
  } state_e;

  state_e      state;
  op_e         op;
  logic [2:0]  acnt;

  assign rb       = (req_tgl == ack_tgl);
  assign data_in  = (state == ST_DATA_IN);
  assign data_out = (state == ST_READ) && rb;
  assign req_op   = op;

  always_ff @(posedge rweb or negedge rst_n) begin
    if (!rst_n) begin
      state   <= ST_IDLE;
      op      <= OP_NONE;
      acnt    <= '0;
      row     <= '0;
      req_tgl <= 1'b0;
    end else if (!ceb && rb) begin
      if (cle) begin
        unique case (io)
          CMD_READ1: begin state <= ST_ADDR; op <= OP_READ; acnt <= '0; end
          CMD_PROG1: begin state <= ST_ADDR; op <= OP_PROG; acnt <= '0; end
          CMD_READ2: if (state == ST_WAIT_CONF && op == OP_READ) begin
                       state   <= ST_READ;
                       req_tgl <= ~req_tgl;
                     end else state <= ST_IDLE;
          CMD_PROG2: if (state == ST_DATA_IN) begin
                       state   <= ST_BUSY_PROG;
                       req_tgl <= ~req_tgl;
                     end else state <= ST_IDLE;
          default:   state <= ST_IDLE;
        endcase
      end else if (ale && state == ST_ADDR) begin
        if (acnt == 3'd2) row[7:0] <= io;
        if (acnt == 3'd3) row[ROW_BITS-1:8] <= io[ROW_BITS-9:0];
        acnt <= acnt + 1'b1;
        if (acnt == 3'(ADDR_CYCLES-1))
          state <= (op == OP_PROG) ? ST_DATA_IN : ST_WAIT_CONF;
      end else if (state == ST_BUSY_PROG) begin
        state <= ST_IDLE;
      end
    end
  end
endmodule

// nand_cell_array -- behavioural model of a NAND flash cell array.
//
// BEHAVIOURAL MODEL: flash cells are analog storage. The model keeps PAGES
// pages of PAGE_BYTES bytes (erased value FFh) and serves the two transfers
// between the array and the page register:
//   fetch  : copies the page at 'row' into the page register, total time t_R
//   program: copies the page register into the page at 'row', time t_PROG
// A transfer starts when req_tgl changes and ends by copying req_tgl into
// ack_tgl; 'busy' is high in between. Page-register words are written over
// the model's own transfer clock xclk (idle low), which the chip selects as
// the page register's write clock while busy. Rows wrap modulo PAGES.
// A change of req_tgl while rst_n is low is not a request.
`timescale 1ns/10ps
module nand_cell_array
  import nand_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 2048,
  parameter int unsigned PAGES      = 8,
  parameter real         T_R_NS     = 25000.0,
  parameter real         T_PROG_NS  = 200000.0,
  localparam int unsigned WORDS = PAGE_BYTES / 2,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic          rst_n,
  input  logic          req_tgl,
  input  op_e           req_op,
  input  logic [15:0]   row,
  output logic          ack_tgl,
  output logic          busy,
  // page register access
  output logic          xclk,
  output logic          pr_we,
  output logic [AW-1:0] pr_waddr,
  output logic [15:0]   pr_wdata,
  output logic [AW-1:0] pr_raddr,
  input  logic [15:0]   pr_rdata
);
  localparam real T_X_NS = 2.0;   // one word per transfer-clock period

  logic [15:0] mem [PAGES][WORDS];
  int unsigned pg;

  initial begin
    for (int p = 0; p < int'(PAGES); p++)
      for (int w = 0; w < int'(WORDS); w++) mem[p][w] = 16'hFFFF;
    ack_tgl  = 1'b0;
    busy     = 1'b0;
    xclk     = 1'b0;
    pr_we    = 1'b0;
    pr_waddr = '0;
    pr_wdata = '0;
    pr_raddr = '0;
  end

  always @(req_tgl) begin
   if (!rst_n) begin
    ack_tgl = req_tgl;        // a toggle during reset is not a request
   end else begin
    busy = 1'b1;
    pg   = int'(row) % int'(PAGES);
    if (req_op == OP_READ) begin
      for (int w = 0; w < int'(WORDS); w++) begin
        pr_we    = 1'b1;
        pr_waddr = AW'(w);
        pr_wdata = mem[pg][w];
        #(T_X_NS / 2) xclk = 1'b1;
        #(T_X_NS / 2) xclk = 1'b0;
      end
      pr_we = 1'b0;
      #(T_R_NS - T_X_NS * WORDS);
    end else begin
      for (int w = 0; w < int'(WORDS); w++) begin
        pr_raddr = AW'(w);
        #(T_X_NS / 2);
        mem[pg][w] = pr_rdata;
        #(T_X_NS / 2);
      end
      #(T_PROG_NS - T_X_NS * WORDS);
    end
    busy    = 1'b0;
    ack_tgl = req_tgl;
   end
  end
endmodule

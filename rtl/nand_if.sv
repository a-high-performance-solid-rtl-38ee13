// nand_if -- controller-side double-data-rate NAND flash interface (one channel).
//
// Drives one channel of WAYS flash chips that share RWEB, CLE, ALE and the
// 8-bit IO bus, each with its own chip enable (CEB) and ready/busy (R/B).
//
// Strobes. RWEB comes from CLK through gen_w: one RWEB period per CLK
// period. Command and address bytes are single-data-rate (one byte per RWEB
// pulse, latched by the chip on the rising edge). Page data is double-data-
// rate: in a write burst the even byte comes from WFIFO0 (output register
// loaded on the rising CLK edge) and the odd byte from WFIFO1 (output
// register loaded on the falling edge); a MUX selected by the CLK level puts
// them on IO, and the chip latches them on the falling and rising RWEB
// edges. In a read burst the chip returns DVS, RWEB delayed by its DLL, with
// the data; RFIFO0 is written on the falling and RFIFO1 on the rising DVS
// edge, and the CLK domain pops them in pairs.
//
// Sequencing. Program = 80h, 4 address bytes, PAGE_BYTES/2 DDR cycles, 10h.
// Read = 00h, 4 address bytes, 30h; the data-out burst is issued later,
// when that chip's R/B has gone low and high again. Each way keeps its own
// pending operation, so the channel can be used for other ways while one
// is busy (way interleaving). When idle the sequencer first serves a way
// whose read data is waiting (round robin), otherwise accepts a new request
// for an idle way.
//
// Flow control. A write burst pauses (RWEB held high for that cycle) when a
// WFIFO is empty; a read burst pauses when another byte pair could overflow
// the RFIFOs, counted by a credit counter in the CLK domain, or when the host
// side holds rd_ready low. evt_wstall / evt_rstall pulse for each paused
// cycle.
//
// Host side: req_* requests a page operation; wr_* supplies write data, two
// bytes per CLK (low byte first on the wire), in request order; rd_* returns
// read data two bytes per CLK with the way and a last flag; prog_done_*
// reports the end of a program. The command codes, address format, stall
// rules and scheduling are this design's choices; the DDR datapath (two
// WFIFOs, two RFIFOs, MUXes, DVS-clocked read) follows the paper.
`timescale 1ns/10ps
module nand_if
  import nand_pkg::*;
#(
  parameter int unsigned WAYS       = 4,
  parameter int unsigned PAGE_BYTES = 2048,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // page operation requests
  input  logic            req_valid,
  output logic            req_ready,
  input  logic            req_write,
  input  logic [WW-1:0]   req_way,
  input  logic [15:0]     req_row,
  // write data (WDATA)
  input  logic            wr_valid,
  output logic            wr_ready,
  input  logic [15:0]     wr_data,
  // read data (RDATA)
  output logic            rd_valid,
  input  logic            rd_ready,
  output logic [15:0]     rd_data,
  output logic [WW-1:0]   rd_way,
  output logic            rd_last,
  // program completion
  output logic            prog_done,
  output logic [WW-1:0]   prog_done_way,
  // mechanism events (one pulse per cycle)
  output logic            evt_wstall,
  output logic            evt_rstall,
  // NAND pins
  output logic            rweb,
  output logic [WAYS-1:0] ceb,
  output logic            cle,
  output logic            ale,
  output logic [7:0]      io_out,
  output logic            io_oe,
  input  logic [7:0]      io_in,
  input  logic            dvs,
  input  logic [WAYS-1:0] rb
);
  localparam int unsigned WORDS = PAGE_BYTES / 2;
  localparam int unsigned CW    = $clog2(WORDS + 1);
  localparam int unsigned FW    = $clog2(FIFO_DEPTH + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_CMD1, S_ADDR, S_DIN, S_CMD2, S_GAP, S_DOUT, S_DOUT_END
  } seq_e;

  // ---------------------------------------------------------------- WFIFOs
  logic       wf_push, wf_pop, wf0_full, wf1_full, wf0_empty, wf1_empty;
  logic [7:0] wf0_dout, wf1_dout;

  assign wr_ready = !wf0_full && !wf1_full;
  assign wf_push  = wr_valid && wr_ready;

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_wfifo0 (
    .clk, .rst_n, .push(wf_push), .din(wr_data[7:0]), .pop(wf_pop),
    .dout(wf0_dout), .full(wf0_full), .empty(wf0_empty), .count());
  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_wfifo1 (
    .clk, .rst_n, .push(wf_push), .din(wr_data[15:8]), .pop(wf_pop),
    .dout(wf1_dout), .full(wf1_full), .empty(wf1_empty), .count());

  // ---------------------------------------------------------------- RFIFOs
  logic       dvs_n, rf0_empty, rf1_empty, rf0_full, rf1_full, rf_pop;
  logic [7:0] rf0_dout, rf1_dout;
  assign dvs_n = ~dvs;

  async_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_rfifo0 (   // falling DVS edge
    .wclk(dvs_n), .wrst_n(rst_n), .push(1'b1), .din(io_in), .full(rf0_full),
    .rclk(clk), .rrst_n(rst_n), .pop(rf_pop), .dout(rf0_dout), .empty(rf0_empty));
  async_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_rfifo1 (   // rising DVS edge
    .wclk(dvs), .wrst_n(rst_n), .push(1'b1), .din(io_in), .full(rf1_full),
    .rclk(clk), .rrst_n(rst_n), .pop(rf_pop), .dout(rf1_dout), .empty(rf1_empty));

  assign rf_pop   = !rf0_empty && !rf1_empty && rd_ready;
  assign rd_valid = !rf0_empty && !rf1_empty;
  assign rd_data  = {rf1_dout, rf0_dout};

  // ---------------------------------------------------------- R/B per way
  logic [WAYS-1:0] rb_s1, rb_s2, seen_busy;
  op_e             way_op [WAYS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb_s1 <= '1;
      rb_s2 <= '1;
    end else begin
      rb_s1 <= rb;
      rb_s2 <= rb_s1;
    end
  end

  // ---------------------------------------------------------- sequencer
  seq_e          st, st_nx;
  logic [2:0]    acnt;
  logic [CW-1:0] wcnt;          // word (byte pair) counter of a burst
  logic [WW-1:0] cur_way, rr;
  logic          cur_write;
  logic [15:0]   cur_row;
  logic [FW-1:0] inflight;      // read pairs requested and not yet popped
  logic [1:0]    gap;

  // per-cycle outputs of the next-state logic
  logic          cyc_nx, cle_nx, ale_nx, ddr_nx;
  logic [7:0]    byte_nx;

  // pick a way whose read data is waiting, round robin after rr
  logic          rd_pick_ok;
  logic [WW-1:0] rd_pick;
  always_comb begin
    rd_pick_ok = 1'b0;
    rd_pick    = '0;
    for (int i = 1; i <= int'(WAYS); i++) begin
      automatic int w = (int'(rr) + i) % int'(WAYS);
      if (!rd_pick_ok && way_op[w] == OP_READ && seen_busy[w] && rb_s2[w]) begin
        rd_pick_ok = 1'b1;
        rd_pick    = WW'(w);
      end
    end
  end

  // pick a finished program (lowest index)
  logic          pd_ok;
  logic [WW-1:0] pd_way;
  always_comb begin
    pd_ok  = 1'b0;
    pd_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (way_op[w] == OP_PROG && seen_busy[w] && rb_s2[w]) begin
        pd_ok  = 1'b1;
        pd_way = WW'(w);
      end
    end
  end

  assign req_ready = (st == S_IDLE) && !rd_pick_ok && (way_op[req_way] == OP_NONE);

  logic rd_credit;
  assign rd_credit = (inflight < FW'(FIFO_DEPTH)) && rd_ready;

  always_comb begin
    st_nx   = st;
    cyc_nx  = 1'b0;
    cle_nx  = 1'b0;
    ale_nx  = 1'b0;
    ddr_nx  = 1'b0;
    byte_nx = 8'h00;
    wf_pop  = 1'b0;
    evt_wstall = 1'b0;
    evt_rstall = 1'b0;
    unique case (st)
      S_IDLE: begin
        if (rd_pick_ok)                  st_nx = S_DOUT;
        else if (req_valid && req_ready) st_nx = S_CMD1;
      end
      S_CMD1: begin
        cyc_nx  = 1'b1; cle_nx = 1'b1;
        byte_nx = cur_write ? CMD_PROG1 : CMD_READ1;
        st_nx   = S_ADDR;
      end
      S_ADDR: begin
        cyc_nx = 1'b1; ale_nx = 1'b1;
        unique case (acnt)
          3'd0, 3'd1: byte_nx = 8'h00;          // column: whole page
          3'd2:       byte_nx = cur_row[7:0];
          default:    byte_nx = cur_row[15:8];
        endcase
        if (acnt == 3'(ADDR_CYCLES - 1)) st_nx = cur_write ? S_DIN : S_CMD2;
      end
      S_DIN: begin
        if (wcnt == CW'(WORDS)) begin
          st_nx = S_CMD2;
        end else if (!wf0_empty && !wf1_empty) begin
          cyc_nx = 1'b1; ddr_nx = 1'b1; wf_pop = 1'b1;
        end else begin
          evt_wstall = 1'b1;
        end
      end
      S_CMD2: begin
        cyc_nx  = 1'b1; cle_nx = 1'b1;
        byte_nx = cur_write ? CMD_PROG2 : CMD_READ2;
        st_nx   = S_GAP;
      end
      S_GAP: begin
        if (gap == 2'd3) st_nx = S_IDLE;
      end
      S_DOUT: begin
        if (wcnt == CW'(WORDS)) begin
          st_nx = S_DOUT_END;
        end else if (rd_credit) begin
          cyc_nx = 1'b1;
        end else begin
          evt_rstall = 1'b1;
        end
      end
      S_DOUT_END: begin
        if (inflight == '0 && gap == 2'd3) st_nx = S_IDLE;
      end
      default: st_nx = S_IDLE;
    endcase
  end

  // registered pin state
  logic       cle_q, ale_q, ddr_q;
  logic [7:0] sdr_q, q0, hold1, q1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      acnt      <= '0;
      wcnt      <= '0;
      cur_way   <= '0;
      rr        <= '0;
      cur_write <= 1'b0;
      cur_row   <= '0;
      inflight  <= '0;
      gap       <= '0;
      cle_q     <= 1'b0;
      ale_q     <= 1'b0;
      ddr_q     <= 1'b0;
      sdr_q     <= '0;
      q0        <= '0;
      hold1     <= '0;
      ceb       <= '1;
      seen_busy <= '0;
      for (int w = 0; w < int'(WAYS); w++) way_op[w] <= OP_NONE;
    end else begin
      st    <= st_nx;
      cle_q <= cle_nx;
      ale_q <= ale_nx;
      ddr_q <= ddr_nx;
      sdr_q <= byte_nx;
      if (wf_pop) begin
        q0    <= wf0_dout;
        hold1 <= wf1_dout;
      end

      // credit counter
      inflight <= inflight + FW'(st == S_DOUT && cyc_nx) - FW'(rf_pop);

      // busy tracking per way
      for (int w = 0; w < int'(WAYS); w++)
        if (way_op[w] != OP_NONE && !rb_s2[w]) seen_busy[w] <= 1'b1;

      // program completion
      if (pd_ok) begin
        way_op[pd_way]    <= OP_NONE;
        seen_busy[pd_way] <= 1'b0;
      end

      unique case (st)
        S_IDLE: begin
          gap  <= '0;
          acnt <= '0;
          wcnt <= '0;
          if (rd_pick_ok) begin
            cur_way <= rd_pick;
            rr      <= rd_pick;
            ceb     <= ~(WAYS'(1) << rd_pick);
          end else if (req_valid && req_ready) begin
            cur_way   <= req_way;
            cur_write <= req_write;
            cur_row   <= req_row;
            ceb       <= ~(WAYS'(1) << req_way);
          end
        end
        S_ADDR:     acnt <= acnt + 1'b1;
        S_DIN:      if (wf_pop) wcnt <= wcnt + 1'b1;
        S_CMD2: begin
          way_op[cur_way]    <= cur_write ? OP_PROG : OP_READ;
          seen_busy[cur_way] <= 1'b0;
        end
        S_GAP: begin
          gap <= gap + 1'b1;
          if (gap == 2'd3) ceb <= '1;
        end
        S_DOUT:     if (cyc_nx) wcnt <= wcnt + 1'b1;
        S_DOUT_END: begin
          if (gap != 2'd3) gap <= gap + 1'b1;
          if (st_nx == S_IDLE) begin
            ceb                <= '1;
            way_op[cur_way]    <= OP_NONE;
            seen_busy[cur_way] <= 1'b0;
          end
        end
        default: ;
      endcase
    end
  end

  // falling-edge output stage of WFIFO1
  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) q1 <= '0;
    else        q1 <= hold1;
  end

  gen_w u_gen_w (.clk, .rst_n, .en(cyc_nx), .rweb);

  assign cle    = cle_q;
  assign ale    = ale_q;
  assign io_out = ddr_q ? (clk ? q0 : q1) : sdr_q;
  assign io_oe  = (st != S_DOUT) && (st != S_DOUT_END);

  // read data tagging
  logic [CW-1:0] rd_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_cnt <= '0;
    else if (rf_pop) rd_cnt <= (rd_cnt == CW'(WORDS - 1)) ? '0 : rd_cnt + 1'b1;
  end
  assign rd_way  = cur_way;
  assign rd_last = (rd_cnt == CW'(WORDS - 1));

  assign prog_done     = pd_ok;
  assign prog_done_way = pd_way;

  // RFIFO overflow would lose read data: the credit counter must prevent it.
  assert property (@(posedge clk) disable iff (!rst_n) inflight <= FW'(FIFO_DEPTH))
    else $error("nand_if: read credit exceeded");
endmodule

// dram_cmd_scheduler: stage 3 of the staged memory scheduler (DCS).
//
// One FIFO per DRAM bank receives the requests that the batch scheduler
// drains, one per cycle; since a batch is moved as a whole, its row hits
// stay consecutive in the bank FIFO. The DCS never reorders within a bank:
// each cycle it looks only at the head of every bank FIFO and works out the
// one command that head needs next, given the bank's row buffer:
//   * row open with the requested row  -> RD or WR (a row hit),
//   * row open with another row         -> PRE (a row conflict),
//   * bank precharged                   -> ACT of the requested row.
// A head is eligible when that command meets the DRAM timing below. Of the
// eligible banks one is chosen round-robin (starting after the bank that
// issued last) and its command is driven on the command bus. A request
// leaves its FIFO, and the scheduler, when its RD or WR issues; done_valid
// and done_req report it in the same cycle. Rows are left open after a
// column command (open-page policy).
//
// Timing, in command-clock cycles, enforced with down-counters:
//   per bank: ACT->RD/WR tRCD, ACT->PRE tRAS, PRE->ACT tRP,
//             RD->PRE tRTP, WR->PRE tCWL+tBURST+tWR;
//   per channel: ACT->ACT tRRD, at most four ACTs in any tFAW window,
//             RD->RD and WR->WR tCCD, WR->RD tCWL+tBURST+tWTR,
//             RD->WR tCL+tBURST+2-tCWL (data-bus turnaround),
//             one command per cycle.
// The defaults are DDR3-1600 11-11-11 values for a x8 device.
//
// Interface: in_valid/in_ready handshake (in_ready is the not-full flag of
// the bank FIFO that in_req addresses; a request transfers when both are
// high). row_hit marks a column command to a row that an earlier request
// already used; row_conflict marks a PRE issued for a different row. cmd_valid/cmd/cmd_bank/cmd_row/
// cmd_col is the command issued in this cycle, decided combinationally from
// registered state. Latency of a request alone in an idle, precharged bank:
// enqueued at cycle t, ACT at t+1, RD/WR at t+1+tRCD.
//
// From the method: per-bank FIFOs filled by the drain, looking only at the
// FIFO heads, deciding from the row buffer state and DRAM timing, round-robin
// among eligible banks, timing constraints such as tRAS and tFAW and data
// bus arbitration. This design's own choices: the exact set of timing
// rules and their values, the open-page policy, and leaving out refresh,
// which the method does not discuss.
module dram_cmd_scheduler
  import sms_pkg::*;
#(
  parameter int unsigned NUM_BANKS  = 8,
  parameter int unsigned FIFO_DEPTH = 15,
  parameter int unsigned T_RCD      = 11,
  parameter int unsigned T_RP       = 11,
  parameter int unsigned T_RAS      = 28,
  parameter int unsigned T_CL       = 11,
  parameter int unsigned T_CWL      = 8,
  parameter int unsigned T_BURST    = 4,
  parameter int unsigned T_CCD      = 4,
  parameter int unsigned T_RRD      = 5,
  parameter int unsigned T_FAW      = 24,
  parameter int unsigned T_WR       = 12,
  parameter int unsigned T_WTR      = 6,
  parameter int unsigned T_RTP      = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // from the batch scheduler
  input  logic                   in_valid,
  output logic                   in_ready,
  input  sched_req_t             in_req,
  // DRAM command bus
  output logic                   cmd_valid,
  output dram_cmd_e              cmd,
  output logic [BANK_W-1:0]      cmd_bank,
  output logic [ROW_W-1:0]       cmd_row,
  output logic [COL_W-1:0]       cmd_col,
  // completion (request left the scheduler)
  output logic                   done_valid,
  output sched_req_t             done_req,
  // status
  output logic [$clog2(FIFO_DEPTH+1)-1:0] bank_count [NUM_BANKS],
  output logic                   row_hit,
  output logic                   row_conflict,
  output logic                   multi_eligible,
  output logic                   faw_block
);

  localparam int unsigned TW = 6;   // counter width
  localparam int unsigned BW = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1;

  localparam int unsigned WR_TO_PRE = T_CWL + T_BURST + T_WR;
  localparam int unsigned WR_TO_RD  = T_CWL + T_BURST + T_WTR;
  localparam int unsigned RD_TO_WR  = T_CL + T_BURST + 2 - T_CWL;

  function automatic logic [TW-1:0] lim(input int unsigned t);
    return (t == 0) ? '0 : TW'(t - 1);
  endfunction

  function automatic logic [TW-1:0] dec(input logic [TW-1:0] c);
    return (c == '0) ? '0 : c - 1'b1;
  endfunction

  function automatic logic [TW-1:0] max_load(input logic [TW-1:0] c,
                                             input int unsigned t);
    logic [TW-1:0] d;
    d = dec(c);
    return (d > lim(t)) ? d : lim(t);
  endfunction

  // ---------------------------------------------------------------- FIFOs
  sched_req_t  head       [NUM_BANKS];
  logic        fifo_empty [NUM_BANKS];
  logic        fifo_full  [NUM_BANKS];
  logic [NUM_BANKS-1:0] fifo_pop;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_fifo
    sync_fifo #(.WIDTH($bits(sched_req_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .wr_en  (in_valid && in_ready && in_req.req.addr.bank == BANK_W'(b)),
      .wr_data(in_req),
      .rd_en  (fifo_pop[b]),
      .rd_data(head[b]),
      .empty  (fifo_empty[b]),
      .full   (fifo_full[b]),
      .count  (bank_count[b])
    );
  end

  assign in_ready = (int'(in_req.req.addr.bank) < NUM_BANKS) &&
                    !fifo_full[BW'(in_req.req.addr.bank)];

  // ---------------------------------------------------------------- state
  logic             open_q   [NUM_BANKS];
  logic [ROW_W-1:0] row_q    [NUM_BANKS];
  logic [TW-1:0]    c_rcd    [NUM_BANKS];
  logic [TW-1:0]    c_ras    [NUM_BANKS];
  logic [TW-1:0]    c_rp     [NUM_BANKS];
  logic [TW-1:0]    c_pre    [NUM_BANKS];
  logic [TW-1:0]    c_rrd, c_rd, c_wr;
  logic [TW-1:0]    c_faw    [4];
  logic [1:0]       faw_ptr;
  logic [BW-1:0]    rr_last;
  logic             served_q [NUM_BANKS];   // open row already served a request

  // ----------------------------------------------------- per-bank decision
  dram_cmd_e            want [NUM_BANKS];
  logic [NUM_BANKS-1:0] elig;
  logic                 faw_ok;
  logic [NUM_BANKS-1:0] act_wait_faw;

  assign faw_ok = (c_faw[faw_ptr] == '0);

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) begin
      want[b]         = CMD_NOP;
      elig[b]         = 1'b0;
      act_wait_faw[b] = 1'b0;
      if (!fifo_empty[b]) begin
        if (open_q[b] && row_q[b] == head[b].req.addr.row) begin
          want[b] = head[b].req.we ? CMD_WR : CMD_RD;
          elig[b] = (c_rcd[b] == '0) &&
                    (head[b].req.we ? (c_wr == '0) : (c_rd == '0));
        end else if (open_q[b]) begin
          want[b] = CMD_PRE;
          elig[b] = (c_ras[b] == '0) && (c_pre[b] == '0);
        end else begin
          want[b] = CMD_ACT;
          elig[b] = (c_rp[b] == '0) && (c_rrd == '0) && faw_ok;
          act_wait_faw[b] = (c_rp[b] == '0) && (c_rrd == '0) && !faw_ok;
        end
      end
    end
  end

  // ------------------------------------------- round-robin among eligible
  logic          any_elig;
  logic [BW-1:0] pick;

  always_comb begin
    logic [BW-1:0] idx;
    any_elig = 1'b0;
    pick     = '0;
    for (int k = 1; k <= NUM_BANKS; k++) begin
      idx = BW'((int'(rr_last) + k) % NUM_BANKS);
      if (!any_elig && elig[idx]) begin
        any_elig = 1'b1;
        pick     = idx;
      end
    end
  end

  assign cmd_valid = any_elig;
  assign cmd       = any_elig ? want[pick] : CMD_NOP;
  assign cmd_bank  = BANK_W'(pick);
  assign cmd_row   = head[pick].req.addr.row;
  assign cmd_col   = head[pick].req.addr.col;

  assign done_valid = any_elig && (cmd == CMD_RD || cmd == CMD_WR);
  assign done_req   = head[pick];

  always_comb begin
    fifo_pop = '0;
    if (done_valid) fifo_pop[pick] = 1'b1;
  end

  // A column command to a row that an earlier request already used.
  assign row_hit        = done_valid && served_q[pick];
  assign row_conflict   = any_elig && cmd == CMD_PRE;
  assign multi_eligible = (elig & (elig - 1'b1)) != '0;   // two or more bits set
  assign faw_block      = |act_wait_faw;

  // ---------------------------------------------------------------- update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        open_q[b]   <= 1'b0;
        served_q[b] <= 1'b0;
        row_q[b]    <= '0;
        c_rcd[b]  <= '0;
        c_ras[b]  <= '0;
        c_rp[b]   <= '0;
        c_pre[b]  <= '0;
      end
      for (int i = 0; i < 4; i++) c_faw[i] <= '0;
      faw_ptr <= '0;
      c_rrd   <= '0;
      c_rd    <= '0;
      c_wr    <= '0;
      rr_last <= BW'(NUM_BANKS-1);
    end else begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        c_rcd[b] <= dec(c_rcd[b]);
        c_ras[b] <= dec(c_ras[b]);
        c_rp[b]  <= dec(c_rp[b]);
        c_pre[b] <= dec(c_pre[b]);
      end
      for (int i = 0; i < 4; i++) c_faw[i] <= dec(c_faw[i]);
      c_rrd <= dec(c_rrd);
      c_rd  <= dec(c_rd);
      c_wr  <= dec(c_wr);

      if (any_elig) begin
        rr_last <= pick;
        unique case (cmd)
          CMD_ACT: begin
            open_q[pick]   <= 1'b1;
            served_q[pick] <= 1'b0;
            row_q[pick]    <= head[pick].req.addr.row;
            c_rcd[pick]    <= lim(T_RCD);
            c_ras[pick]    <= lim(T_RAS);
            c_rrd          <= lim(T_RRD);
            c_faw[faw_ptr] <= lim(T_FAW);
            faw_ptr        <= faw_ptr + 1'b1;
          end
          CMD_PRE: begin
            open_q[pick] <= 1'b0;
            c_rp[pick]   <= lim(T_RP);
          end
          CMD_RD: begin
            served_q[pick] <= 1'b1;
            c_pre[pick] <= max_load(c_pre[pick], T_RTP);
            c_rd        <= max_load(c_rd, T_CCD);
            c_wr        <= max_load(c_wr, RD_TO_WR);
          end
          CMD_WR: begin
            served_q[pick] <= 1'b1;
            c_pre[pick] <= max_load(c_pre[pick], WR_TO_PRE);
            c_wr        <= max_load(c_wr, T_CCD);
            c_rd        <= max_load(c_rd, WR_TO_RD);
          end
          default: ;
        endcase
      end
    end
  end

  // All timing values must fit the counters.
  initial begin
    assert (T_RAS < 64 && T_FAW < 64 && WR_TO_PRE < 64 && WR_TO_RD < 64 &&
            RD_TO_WR < 64 && T_RCD < 64 && T_RP < 64)
      else $error("dram_cmd_scheduler: timing parameter exceeds counter width");
  end

  // Only a bank with a request at its FIFO head can be given a command.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cmd_valid |-> !fifo_empty[pick])
    else $error("dram_cmd_scheduler: command for an empty bank");

endmodule

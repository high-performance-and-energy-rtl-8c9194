// sms_top: one memory controller built as a Staged Memory Scheduler, for a
// chip whose CPU cores and GPU share one DRAM channel per controller.
//
// Three simple stages replace the single large request buffer of a
// conventional controller:
//   1. batch formation: one FIFO per source (NUM_CPU cores, then the GPU at
//      index NUM_CPU) groups each source's consecutive same-row requests
//      into batches (batch_former);
//   2. batch scheduling: one ready batch at a time is chosen, by
//      shortest-job-first with probability p = sjf_prob/256 or round-robin
//      otherwise, and drained one request per cycle (batch_scheduler); SJF
//      ranks sources by their requests in flight in all three stages
//      (inflight_counter);
//   3. DRAM command scheduling: one FIFO per bank; the heads are turned into
//      ACT/PRE/RD/WR commands under the DRAM timing, round-robin across
//      banks (dram_cmd_scheduler).
//
// Interface: per source a valid/ready request port (req_ready is low only
// while that source's stage-1 FIFO is full); the DRAM command bus of the
// channel (one command per cycle, cmd_valid marks a cycle with a command);
// a completion port that names each request, with its source and tag, in the
// cycle its RD or WR command issues (read data and write data are moved by
// the channel's data path, which is outside this block). sjf_prob may be
// changed at any time and is used at the next batch pick.
//
// Timing: a request accepted at a clock edge is visible to stage 2 from
// that edge; a ready batch is picked in one cycle and moved at one request
// per cycle; a request reaches its bank FIFO in the cycle it is drained.
//
// From the method: the three stages and their connection, the per-source
// FIFOs and per-bank FIFOs, the batch rules, SJF/round-robin with
// probability p, the one-request-per-cycle drain and the head-only,
// round-robin command scheduler. The sizes are those of the main evaluated
// system (16 CPU cores and one GPU per controller, 300 buffer entries split
// as 16 x 10 CPU + 20 GPU + 8 banks x 15); the split of the 300 entries, the
// age threshold, the DRAM timing and all widths and handshakes are this
// design's own choices (see the README). The occupancy outputs of the stage-1
// and bank FIFOs and the stage-2 drain flag are left unconnected here: they
// serve block-level tests and monitoring.
module sms_top
  import sms_pkg::*;
#(
  parameter int unsigned NUM_CPU        = 16,
  parameter int unsigned CPU_FIFO_DEPTH = 10,
  parameter int unsigned GPU_FIFO_DEPTH = 20,
  parameter int unsigned AGE_THRESH     = 200,
  parameter int unsigned NUM_BANKS      = 8,
  parameter int unsigned DCS_FIFO_DEPTH = 15,
  parameter int unsigned T_RCD          = 11,
  parameter int unsigned T_RP           = 11,
  parameter int unsigned T_RAS          = 28,
  parameter int unsigned T_CL           = 11,
  parameter int unsigned T_CWL          = 8,
  parameter int unsigned T_BURST        = 4,
  parameter int unsigned T_CCD          = 4,
  parameter int unsigned T_RRD          = 5,
  parameter int unsigned T_FAW          = 24,
  parameter int unsigned T_WR           = 12,
  parameter int unsigned T_WTR          = 6,
  parameter int unsigned T_RTP          = 6,
  localparam int unsigned NUM_SRC       = NUM_CPU + 1,
  // a source can hold its whole stage-1 FIFO plus every bank FIFO entry
  localparam int unsigned CNT_W         =
      $clog2(((GPU_FIFO_DEPTH > CPU_FIFO_DEPTH) ? GPU_FIFO_DEPTH : CPU_FIFO_DEPTH)
             + NUM_BANKS * DCS_FIFO_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [8:0]         sjf_prob,
  // requests from the CPU cores (0..NUM_CPU-1) and the GPU (NUM_CPU)
  input  logic [NUM_SRC-1:0] req_valid,
  output logic [NUM_SRC-1:0] req_ready,
  input  mem_req_t           req        [NUM_SRC],
  // DRAM command bus
  output logic               cmd_valid,
  output dram_cmd_e          cmd,
  output logic [BANK_W-1:0]  cmd_bank,
  output logic [ROW_W-1:0]   cmd_row,
  output logic [COL_W-1:0]   cmd_col,
  // completions
  output logic               done_valid,
  output sched_req_t         done_req,
  // requests of each source held in the scheduler, and event flags
  output logic [CNT_W-1:0]   inflight   [NUM_SRC],
  output sms_events_t        events
);

  // stage 1 <-> stage 2
  logic [NUM_SRC-1:0] batch_ready, head_last, head_valid, grant, pop;
  mem_req_t           head_req [NUM_SRC];
  logic [TS_W-1:0]    head_age [NUM_SRC];
  logic [NUM_SRC-1:0] rdy_row, rdy_age, rdy_full;

  // stage 2 <-> stage 3
  logic       s2_valid, s2_ready;
  sched_req_t s2_req;
  logic       pick_sjf, pick_rr, drain_stall;
  logic       row_hit, row_conflict, multi_eligible, faw_block;

  // ------------------------------------------------------------ stage 1
  for (genvar s = 0; s < NUM_SRC; s++) begin : g_src
    localparam int unsigned DEPTH = (s == NUM_CPU) ? GPU_FIFO_DEPTH : CPU_FIFO_DEPTH;
    batch_former #(.DEPTH(DEPTH), .AGE_THRESH(AGE_THRESH)) u_bf (
      .clk, .rst_n,
      .in_valid     (req_valid[s]),
      .in_ready     (req_ready[s]),
      .in_req       (req[s]),
      .head_valid   (head_valid[s]),
      .head_req     (head_req[s]),
      .head_last    (head_last[s]),
      .head_age     (head_age[s]),
      .batch_ready  (batch_ready[s]),
      .grant        (grant[s]),
      .pop          (pop[s]),
      .count        (),
      .ready_by_row (rdy_row[s]),
      .ready_by_age (rdy_age[s]),
      .ready_by_full(rdy_full[s])
    );
  end

  inflight_counter #(.NUM_SRC(NUM_SRC), .CNT_W(CNT_W)) u_inflight (
    .clk, .rst_n,
    .inc      (req_valid & req_ready),
    .dec_valid(done_valid),
    .dec_src  (done_req.src),
    .count    (inflight)
  );

  // ------------------------------------------------------------ stage 2
  batch_scheduler #(.NUM_SRC(NUM_SRC), .CNT_W(CNT_W)) u_bs (
    .clk, .rst_n, .sjf_prob,
    .batch_ready, .head_req, .head_last, .head_age,
    .inflight,
    .grant, .pop,
    .out_valid(s2_valid), .out_req(s2_req), .out_ready(s2_ready),
    .pick_sjf, .pick_rr, .drain_stall, .draining()
  );

  // ------------------------------------------------------------ stage 3
  dram_cmd_scheduler #(
    .NUM_BANKS(NUM_BANKS), .FIFO_DEPTH(DCS_FIFO_DEPTH),
    .T_RCD(T_RCD), .T_RP(T_RP), .T_RAS(T_RAS), .T_CL(T_CL), .T_CWL(T_CWL),
    .T_BURST(T_BURST), .T_CCD(T_CCD), .T_RRD(T_RRD), .T_FAW(T_FAW),
    .T_WR(T_WR), .T_WTR(T_WTR), .T_RTP(T_RTP)
  ) u_dcs (
    .clk, .rst_n,
    .in_valid(s2_valid), .in_ready(s2_ready), .in_req(s2_req),
    .cmd_valid, .cmd, .cmd_bank, .cmd_row, .cmd_col,
    .done_valid, .done_req,
    .bank_count(),
    .row_hit, .row_conflict, .multi_eligible, .faw_block
  );

  assign events = '{
    src_full:       |(req_valid & ~req_ready),
    ready_by_row:   |rdy_row,
    ready_by_age:   |rdy_age,
    ready_by_full:  |rdy_full,
    pick_sjf:       pick_sjf,
    pick_rr:        pick_rr,
    drain_stall:    drain_stall,
    row_hit:        row_hit,
    row_conflict:   row_conflict,
    multi_eligible: multi_eligible,
    faw_block:      faw_block
  };

  // A drained request always finds its source's FIFO non-empty.
  assert property (@(posedge clk) disable iff (!rst_n)
                   |pop |-> |(pop & head_valid))
    else $error("sms_top: drain from an empty source FIFO");

endmodule

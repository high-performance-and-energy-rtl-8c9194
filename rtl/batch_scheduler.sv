// batch_scheduler: stage 2 of the staged memory scheduler.
//
// The scheduler looks only at whole batches. In its PICK state it considers
// every source whose stage-1 FIFO has a ready batch and chooses one:
//   * with probability p, shortest job first (SJF): the source with the
//     fewest requests in flight in the whole scheduler; among equals the one
//     whose ready batch is oldest; among equals the lowest source index;
//   * otherwise round-robin: the first ready source after the one last
//     chosen by round-robin.
// p is the run-time input sjf_prob / 256 (0 = always round-robin,
// 256 = always SJF). A 16-bit LFSR, stepped every cycle, supplies the
// random number; a pick is SJF when its low 8 bits are below sjf_prob.
//
// Having chosen, it pulses grant[src] (which closes the batch in stage 1)
// and enters the DRAIN state, in which it forwards the head request of the
// chosen source to the DRAM command scheduler, one request per cycle, tagged
// with the source index. A cycle in which the target bank FIFO of stage 3
// is full (out_ready low) forwards nothing. After the request marked
// head_last it returns to PICK.
//
// Interface: per-source vectors from the batch formers; out_valid/out_ready
// handshake toward stage 3 (transfer on a cycle with both high, and pop of
// the stage-1 FIFO in the same cycle). Timing: one cycle to pick, then one
// request per cycle while stage 3 accepts; a batch of n requests occupies
// the scheduler for n+1 cycles when nothing stalls.
//
// From the method: the SJF/round-robin choice with probability p, the SJF
// criterion (fewest in-flight requests, oldest ready batch), round-robin
// across source FIFOs, the drain state moving one request per cycle. This
// design's own choices: the LFSR and the 1/256 resolution of p, the tie
// breaks, the round-robin pointer moving only on round-robin picks, and the
// separate pick cycle.
module batch_scheduler
  import sms_pkg::*;
#(
  parameter int unsigned NUM_SRC   = 17,
  parameter int unsigned CNT_W     = 6,
  parameter logic [15:0] LFSR_SEED = 16'hACE1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [8:0]           sjf_prob,      // p = sjf_prob / 256
  // from the batch formers
  input  logic [NUM_SRC-1:0]   batch_ready,
  input  mem_req_t             head_req   [NUM_SRC],
  input  logic [NUM_SRC-1:0]   head_last,
  input  logic [TS_W-1:0]      head_age   [NUM_SRC],
  input  logic [CNT_W-1:0]     inflight   [NUM_SRC],
  output logic [NUM_SRC-1:0]   grant,
  output logic [NUM_SRC-1:0]   pop,
  // to the DRAM command scheduler
  output logic                 out_valid,
  output sched_req_t           out_req,
  input  logic                 out_ready,
  // status
  output logic                 pick_sjf,
  output logic                 pick_rr,
  output logic                 drain_stall,
  output logic                 draining
);

  typedef enum logic {S_PICK, S_DRAIN} state_e;

  state_e           state;
  logic [SRC_W-1:0] sel_q;
  logic [SRC_W-1:0] rr_ptr;
  logic [15:0]      lfsr;

  logic             any_ready, use_sjf;
  logic [SRC_W-1:0] sjf_sel, rr_sel, pick_sel;

  assign any_ready = |batch_ready;
  assign use_sjf   = ({1'b0, lfsr[7:0]} < sjf_prob);

  // Shortest job first: fewest in flight, then oldest batch, then lowest index.
  always_comb begin
    logic             found;
    logic [CNT_W-1:0] best_cnt;
    logic [TS_W-1:0]  best_age;
    found    = 1'b0;
    sjf_sel  = '0;
    best_cnt = '0;
    best_age = '0;
    for (int s = 0; s < NUM_SRC; s++) begin
      if (batch_ready[s]) begin
        if (!found || inflight[s] < best_cnt ||
            (inflight[s] == best_cnt && head_age[s] > best_age)) begin
          found    = 1'b1;
          sjf_sel  = SRC_W'(s);
          best_cnt = inflight[s];
          best_age = head_age[s];
        end
      end
    end
  end

  // Round-robin: first ready source after rr_ptr.
  always_comb begin
    logic             found;
    logic [SRC_W-1:0] idx;
    found  = 1'b0;
    rr_sel = '0;
    for (int k = 1; k <= NUM_SRC; k++) begin
      idx = SRC_W'((int'(rr_ptr) + k) % NUM_SRC);
      if (!found && batch_ready[idx]) begin
        found  = 1'b1;
        rr_sel = idx;
      end
    end
  end

  assign pick_sel = use_sjf ? sjf_sel : rr_sel;

  always_comb begin
    grant       = '0;
    pop         = '0;
    pick_sjf    = 1'b0;
    pick_rr     = 1'b0;
    out_valid   = 1'b0;
    out_req     = '{src: sel_q, req: head_req[sel_q]};
    drain_stall = 1'b0;
    draining    = (state == S_DRAIN);
    if (state == S_PICK) begin
      if (any_ready) begin
        grant[pick_sel] = 1'b1;
        pick_sjf        = use_sjf;
        pick_rr         = !use_sjf;
      end
    end else begin
      out_valid   = 1'b1;
      pop[sel_q]  = out_ready;
      drain_stall = !out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_PICK;
      sel_q  <= '0;
      rr_ptr <= SRC_W'(NUM_SRC-1);
      lfsr   <= LFSR_SEED;
    end else begin
      // x^16 + x^14 + x^13 + x^11 + 1, Galois form
      lfsr <= {1'b0, lfsr[15:1]} ^ (lfsr[0] ? 16'hB400 : 16'h0000);
      case (state)
        S_PICK: if (any_ready) begin
          state <= S_DRAIN;
          sel_q <= pick_sel;
          if (!use_sjf) rr_ptr <= pick_sel;
        end
        S_DRAIN: if (out_ready && head_last[sel_q]) state <= S_PICK;
        default: state <= S_PICK;
      endcase
    end
  end

  // The selected source must hold a request for every drain cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_DRAIN) |-> (sel_q < SRC_W'(NUM_SRC)))
    else $error("batch_scheduler: bad selection");

endmodule

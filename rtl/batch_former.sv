// batch_former: stage 1 of the staged memory scheduler, one instance per
// request source (a CPU core or the GPU).
//
// Requests from the source enter a plain FIFO in arrival order. Each entry
// carries a "first" bit: it is set when the request does not go to the same
// bank and row as the request enqueued just before it, so that the FIFO is a
// sequence of batches, each a run of same-row requests. The batch at the head
// of the FIFO is ready for the batch scheduler when any of the three
// conditions of the method holds:
//   * a later request to a different row has arrived (two or more batches
//     are in the FIFO),
//   * the oldest request of the batch (the FIFO head) has waited at least
//     AGE_THRESH cycles,
//   * the FIFO is full.
// When the batch scheduler selects this source it pulses `grant`; from then
// on the selected batch is closed, so a same-row request arriving during the
// drain starts a new batch. The scheduler then pops one request per cycle;
// `head_last` tells it which entry ends the batch.
//
// Interface: in_valid/in_ready handshake on the request side (a request is
// accepted on a cycle with both high; in_ready is low only when the FIFO is
// full). head_* show the FIFO head combinationally. pop removes the head at
// the clock edge and must only be given while head_valid is high.
//
// Timing: a request is visible at the head one cycle after it is accepted.
// The age is measured with a free-running TS_W-bit cycle counter and an
// arrival timestamp per entry; a sticky flag keeps the head aged once it has
// crossed the threshold, so the wrap of the counter cannot un-age it.
//
// From the method: per-source FIFO, the batch definition and the three
// readiness conditions. This design's own choices: the timestamp scheme,
// closing the batch on grant, and that a full FIFO refuses new requests
// (back-pressure to the source) rather than dropping them.
module batch_former
  import sms_pkg::*;
#(
  parameter int unsigned DEPTH      = 10,
  parameter int unsigned AGE_THRESH = 200
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // request side
  input  logic                 in_valid,
  output logic                 in_ready,
  input  mem_req_t             in_req,
  // scheduler side
  output logic                 head_valid,
  output mem_req_t             head_req,
  output logic                 head_last,
  output logic [TS_W-1:0]      head_age,
  output logic                 batch_ready,
  input  logic                 grant,
  input  logic                 pop,
  // status
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                 ready_by_row,
  output logic                 ready_by_age,
  output logic                 ready_by_full
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  mem_req_t         mem_req   [DEPTH];
  logic             mem_first [DEPTH];
  logic [TS_W-1:0]  mem_ts    [DEPTH];

  logic [PTR_W-1:0] rd_ptr, wr_ptr, rd_nxt;
  logic [CNT_W-1:0] cnt;
  logic [CNT_W-1:0] nbatch;          // batches currently in the FIFO
  logic [TS_W-1:0]  now;
  logic             tail_open;       // newest batch may still grow
  logic [BANK_W-1:0] tail_bank;
  logic [ROW_W-1:0]  tail_row;
  logic             aged_q;

  logic enq, deq, first_new, close_tail, age_over;

  function automatic logic [PTR_W-1:0] inc_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign count      = cnt;
  assign in_ready   = (cnt != CNT_W'(DEPTH));
  assign enq        = in_valid && in_ready;
  assign deq        = pop && head_valid;
  assign head_valid = (cnt != '0);
  assign head_req   = mem_req[rd_ptr];
  assign rd_nxt     = inc_ptr(rd_ptr);
  assign head_last  = (cnt == CNT_W'(1)) || mem_first[rd_nxt];
  assign head_age   = now - mem_ts[rd_ptr];

  // The granted batch is closed when it is the newest one in the FIFO.
  assign close_tail = grant && (nbatch == CNT_W'(1));
  assign first_new  = !(tail_open && !close_tail &&
                        in_req.addr.bank == tail_bank &&
                        in_req.addr.row  == tail_row);

  assign age_over      = head_valid && (head_age >= TS_W'(AGE_THRESH));
  assign ready_by_row  = head_valid && (nbatch > CNT_W'(1));
  assign ready_by_age  = head_valid && (aged_q || age_over);
  assign ready_by_full = !in_ready;
  assign batch_ready   = ready_by_row || ready_by_age || ready_by_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      wr_ptr    <= '0;
      cnt       <= '0;
      nbatch    <= '0;
      now       <= '0;
      tail_open <= 1'b0;
      tail_bank <= '0;
      tail_row  <= '0;
      aged_q    <= 1'b0;
    end else begin
      now <= now + 1'b1;
      if (enq) begin
        mem_req[wr_ptr]   <= in_req;
        mem_first[wr_ptr] <= first_new;
        mem_ts[wr_ptr]    <= now;
        wr_ptr            <= inc_ptr(wr_ptr);
        tail_bank         <= in_req.addr.bank;
        tail_row          <= in_req.addr.row;
      end
      if (enq)             tail_open <= 1'b1;
      else if (close_tail) tail_open <= 1'b0;
      if (deq) rd_ptr <= rd_nxt;
      cnt    <= cnt + CNT_W'(enq) - CNT_W'(deq);
      nbatch <= nbatch + CNT_W'(enq && first_new) - CNT_W'(deq && head_last);
      if (deq)           aged_q <= 1'b0;
      else if (age_over) aged_q <= 1'b1;
    end
  end

  // A pop is only legal while the FIFO holds a request.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid)
    else $error("batch_former: pop while empty");

endmodule

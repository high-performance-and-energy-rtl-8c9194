// inflight_counter: per-source count of requests held anywhere in the
// scheduler (stage 1 FIFO, batch scheduler drain, stage 3 bank FIFO).
//
// The shortest-job-first policy of the batch scheduler favours the source
// with the fewest such requests, so the counter of a source goes up when one
// of its requests is accepted into its stage-1 FIFO and down when that
// request leaves the scheduler, which is when the DRAM command scheduler
// issues its column command (RD or WR) to the DRAM.
//
// Interface: inc is a vector with one bit per source (several sources may
// be accepted in the same cycle); dec_valid/dec_src name at most one
// completing request per cycle, since only one column command is issued per
// cycle. count is registered: it reflects the events up to the previous
// clock edge.
//
// From the method: what is counted ("total in-flight memory requests across
// all three stages"). This design's own choices: the moment a request stops
// counting (issue of its column command) and the counter width, which only
// has to hold the total buffer capacity of one source.
module inflight_counter
  import sms_pkg::*;
#(
  parameter int unsigned NUM_SRC = 17,
  parameter int unsigned CNT_W   = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_SRC-1:0]   inc,
  input  logic                 dec_valid,
  input  logic [SRC_W-1:0]     dec_src,
  output logic [CNT_W-1:0]     count [NUM_SRC]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NUM_SRC; s++) count[s] <= '0;
    end else begin
      for (int s = 0; s < NUM_SRC; s++) begin
        count[s] <= count[s] + CNT_W'(inc[s])
                             - CNT_W'(dec_valid && dec_src == SRC_W'(s));
      end
    end
  end

  // A source cannot complete more requests than it has in flight.
  assert property (@(posedge clk) disable iff (!rst_n)
                   dec_valid |-> (dec_src < SRC_W'(NUM_SRC)) &&
                                 (count[dec_src] != '0 || inc[dec_src]))
    else $error("inflight_counter: completion of a source with nothing in flight");

endmodule

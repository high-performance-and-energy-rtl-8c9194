// sync_fifo: single-clock first-in first-out queue, used for the per-bank
// queues of the DRAM command scheduler.
//
// DEPTH entries of WIDTH bits held in a register array with wrap-around read
// and write pointers; DEPTH need not be a power of two. A write is accepted
// when wr_en is high and the queue is not full; a read (pop) removes the
// head when rd_en is high and the queue is not empty. Both may happen in the
// same cycle. rd_data shows the head combinationally, one cycle after the
// entry was written. Nothing here is specific to the scheduling method.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 15
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;
  logic             do_wr, do_rd;

  function automatic logic [PTR_W-1:0] inc_ptr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign empty   = (count == '0);
  assign full    = (count == CNT_W'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc_ptr(wr_ptr);
      if (do_rd) rd_ptr <= inc_ptr(rd_ptr);
      count <= count + CNT_W'(do_wr) - CNT_W'(do_rd);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("sync_fifo: write while full");

endmodule

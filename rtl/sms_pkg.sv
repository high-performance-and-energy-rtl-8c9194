// sms_pkg: types and widths shared by the staged memory scheduler.
//
// A request, as it arrives from a CPU core or the GPU, carries a DRAM
// address already split into bank, row and column (the channel has been
// chosen upstream), a write flag and a tag that the requester uses to match
// the completion. Inside the scheduler the request additionally carries the
// index of the source it came from, so that the in-flight counters and the
// completion can be attributed.
//
// The field widths are this design's own choice; the scheduling method does
// not depend on them. ROW_W = 15 and COL_W = 7 fit a DDR3 device with 32K
// rows and 64-byte lines in an 8 KB page. BANK_W = 3 allows up to 8 banks.
package sms_pkg;

  localparam int unsigned BANK_W = 3;
  localparam int unsigned ROW_W  = 15;
  localparam int unsigned COL_W  = 7;
  localparam int unsigned TAG_W  = 8;
  localparam int unsigned SRC_W  = 5;   // up to 32 sources
  localparam int unsigned TS_W   = 16;  // arrival timestamp / age width

  typedef struct packed {
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } mem_addr_t;

  typedef struct packed {
    mem_addr_t         addr;
    logic              we;    // 1 = write, 0 = read
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  typedef struct packed {
    logic [SRC_W-1:0]  src;
    mem_req_t          req;
  } sched_req_t;

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } dram_cmd_e;

  // One-cycle event flags of the scheduler, for performance counters and
  // for checking that each mechanism is exercised.
  typedef struct packed {
    logic src_full;        // a source offered a request to its full FIFO
    logic ready_by_row;    // some head batch is ready: a later row arrived
    logic ready_by_age;    // some head batch is ready: age threshold
    logic ready_by_full;   // some head batch is ready: FIFO full
    logic pick_sjf;        // a batch was picked by shortest job first
    logic pick_rr;         // a batch was picked round-robin
    logic drain_stall;     // the drain waited for a full bank FIFO
    logic row_hit;         // column command to an already used open row
    logic row_conflict;    // precharge to open a different row
    logic multi_eligible;  // several banks could issue a command
    logic faw_block;       // an activate waited only for the tFAW window
  } sms_events_t;

endpackage

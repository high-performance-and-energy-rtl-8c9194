// tb_dram_cmd_scheduler: self-checking test of the stage-3 DRAM command
// scheduler, with 8 banks, 4-entry bank FIFOs and the default DDR3-1600
// timing. A behavioural DRAM (dram_model) checks every command against the
// protocol rules. The test checks
//   * the latency of a lone read: ACT one cycle after the request enters,
//     RD tRCD after the ACT;
//   * row hits: a run of same-row reads needs one ACT, and the RDs are tCCD
//     apart;
//   * a row conflict: PRE no earlier than tRAS after the ACT, then ACT
//     tRP later;
//   * round-robin between banks: two banks with row hits alternate;
//   * 600 random requests: each completes exactly once, in FIFO order per
//     bank, with no protocol violation, and the tFAW limit is reached.
module tb_dram_cmd_scheduler;
  import sms_pkg::*;

  localparam int NB = 8;
  localparam int DEPTH = 4;
  localparam int T_RCD = 11, T_RP = 11, T_RAS = 28, T_CCD = 4;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // falling edge resets the asynchronous flops
  always #5 clk = ~clk;

  logic in_valid, in_ready, cmd_valid, done_valid;
  logic row_hit, row_conflict, multi_eligible, faw_block;
  sched_req_t in_req, done_req;
  dram_cmd_e cmd;
  logic [BANK_W-1:0] cmd_bank;
  logic [ROW_W-1:0] cmd_row;
  logic [COL_W-1:0] cmd_col;
  logic [$clog2(DEPTH+1)-1:0] bank_count [NB];
  int violations, n_act, n_pre, n_rd, n_wr;
  int checks = 0, failures = 0;
  longint cyc = 0;

  dram_cmd_scheduler #(.NUM_BANKS(NB), .FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_req,
    .cmd_valid, .cmd, .cmd_bank, .cmd_row, .cmd_col,
    .done_valid, .done_req, .bank_count,
    .row_hit, .row_conflict, .multi_eligible, .faw_block);

  dram_model #(.NUM_BANKS(NB)) u_dram (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_bank, .cmd_row, .cmd_col,
    .violations, .n_act, .n_pre, .n_rd, .n_wr);

  // command log: cycle, command and bank of every command issued
  longint   log_t   [$];
  dram_cmd_e log_c  [$];
  int       log_b   [$];
  // completions
  sched_req_t done_q [$];
  int n_faw_block = 0, n_multi = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      cyc <= cyc + 1;
      if (cmd_valid) begin
        log_t.push_back(cyc); log_c.push_back(cmd); log_b.push_back(int'(cmd_bank));
      end
      if (done_valid) done_q.push_back(done_req);
      if (faw_block) n_faw_block++;
      if (multi_eligible) n_multi++;
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  function automatic sched_req_t mk(input int bank, input int row, input int col,
                                    input logic we, input int tag);
    sched_req_t r;
    r = '0;
    r.src = SRC_W'(tag % 17);
    r.req.addr.bank = BANK_W'(bank);
    r.req.addr.row  = ROW_W'(row);
    r.req.addr.col  = COL_W'(col);
    r.req.we        = we;
    r.req.tag       = TAG_W'(tag);
    return r;
  endfunction

  // enqueue one request (waits while its bank FIFO is full); returns the
  // cycle number of the clock edge that accepted it
  task automatic send(input sched_req_t r, output longint t_acc);
    @(negedge clk);
    in_valid = 1'b1;
    in_req   = r;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    t_acc = cyc;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic drain_all();
    int w; w = 0;
    while (w < 2000) begin
      int busy; busy = 0;
      for (int b = 0; b < NB; b++) busy += int'(bank_count[b]);
      if (busy == 0) break;
      @(negedge clk); w++;
    end
    repeat (5) @(negedge clk);
  endtask

  // position in the log of the k-th command of a kind to a bank, from index i0
  function automatic int find(input int i0, input dram_cmd_e c, input int b);
    for (int i = i0; i < log_c.size(); i++)
      if (log_c[i] == c && log_b[i] == b) return i;
    return -1;
  endfunction

  initial begin
    longint ta;
    int i_act, i_rd, i_pre, i_act2, base;
    in_valid = 1'b0; in_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // ---- 1. lone read: ACT in the cycle after the accepting edge, RD tRCD later
    base = log_c.size();
    send(mk(0, 10, 1, 1'b0, 1), ta);
    drain_all();
    i_act = find(base, CMD_ACT, 0);
    i_rd  = find(base, CMD_RD, 0);
    check(i_act >= 0 && i_rd >= 0, "lone read issues ACT and RD");
    if (i_act >= 0 && i_rd >= 0) begin
      // accepted at edge ta; the request is at the head from then, so the ACT
      // is the command of the cycle that ends at edge ta+1
      check(log_t[i_act] == ta + 1, $sformatf("ACT one cycle after the request (%0d vs %0d)", log_t[i_act], ta + 1));
      check(log_t[i_rd] - log_t[i_act] == T_RCD, $sformatf("RD tRCD after ACT (got %0d)", log_t[i_rd] - log_t[i_act]));
    end
    check(done_q.size() == 1 && done_q[0].req.tag == 1, "lone read completes");

    // ---- 2. row hits
    base = log_c.size();
    begin
      int acts, prev_t, ok;
      for (int k = 0; k < 3; k++) send(mk(0, 10, 2 + k, 1'b0, 2 + k), ta);
      drain_all();
      acts = 0; ok = 1; prev_t = -1;
      for (int i = base; i < log_c.size(); i++) begin
        if (log_c[i] == CMD_ACT || log_c[i] == CMD_PRE) acts++;
        if (log_c[i] == CMD_RD) begin
          if (prev_t >= 0 && log_t[i] - prev_t != T_CCD) ok = 0;
          prev_t = int'(log_t[i]);
        end
      end
      check(acts == 0, "hits to the open row need no ACT or PRE");
      check(ok == 1, "back-to-back row hits are tCCD apart");
      check(done_q.size() == 4, "all hits complete");
    end

    // ---- 3. row conflict in bank 1
    base = log_c.size();
    send(mk(1, 20, 0, 1'b0, 10), ta);
    send(mk(1, 21, 0, 1'b0, 11), ta);
    drain_all();
    i_act  = find(base, CMD_ACT, 1);
    i_pre  = find(base, CMD_PRE, 1);
    i_act2 = (i_pre >= 0) ? find(i_pre, CMD_ACT, 1) : -1;
    check(i_act >= 0 && i_pre >= 0 && i_act2 >= 0, "conflict issues ACT, PRE, ACT");
    if (i_act >= 0 && i_pre >= 0 && i_act2 >= 0) begin
      check(log_t[i_pre] - log_t[i_act] == T_RAS, $sformatf("PRE at tRAS after ACT (got %0d)", log_t[i_pre] - log_t[i_act]));
      check(log_t[i_act2] - log_t[i_pre] == T_RP, $sformatf("ACT at tRP after PRE (got %0d)", log_t[i_act2] - log_t[i_pre]));
    end

    // ---- 4. round-robin between two banks with hits queued
    send(mk(2, 5, 0, 1'b0, 20), ta);
    send(mk(3, 5, 0, 1'b0, 21), ta);
    drain_all();
    base = log_c.size();
    for (int k = 0; k < 3; k++) begin
      send(mk(2, 5, 1 + k, 1'b0, 22 + k), ta);
      send(mk(3, 5, 1 + k, 1'b0, 25 + k), ta);
    end
    drain_all();
    begin
      int seq [$];
      int alt;
      for (int i = base; i < log_c.size(); i++) if (log_c[i] == CMD_RD) seq.push_back(log_b[i]);
      alt = (seq.size() == 6);
      for (int i = 1; i < seq.size(); i++) if (seq[i] == seq[i-1]) alt = 0;
      check(alt == 1, "two banks with eligible hits alternate round-robin");
    end

    // ---- 5. random traffic
    begin
      int tags_done [int];
      int bank_seq  [NB][$];
      int n_done0, ok_order, dup;
      n_done0 = done_q.size();
      for (int k = 0; k < 600; k++) begin
        int b, row, t;
        b   = $urandom_range(0, NB - 1);
        row = $urandom_range(0, 3);
        t   = 1000 + k;
        bank_seq[b].push_back(t & 255);
        send(mk(b, row, k % 128, ($urandom_range(0, 3) == 0), t), ta);
      end
      drain_all();
      check(done_q.size() - n_done0 == 600, $sformatf("600 random requests complete (got %0d)", done_q.size() - n_done0));
      ok_order = 1;
      for (int i = n_done0; i < done_q.size(); i++) begin
        int b;
        b = int'(done_q[i].req.addr.bank);
        if (bank_seq[b].size() == 0 || bank_seq[b].pop_front() != int'(done_q[i].req.tag)) ok_order = 0;
      end
      check(ok_order == 1, "each bank completes its requests in FIFO order, each once");
    end

    check(violations == 0, $sformatf("no DRAM protocol violations (got %0d)", violations));
    check(n_faw_block > 0, "the tFAW window limited an ACT at least once");
    check(n_multi > 0, "several banks eligible in the same cycle at least once");
    check(n_rd + n_wr == done_q.size(), "one column command per completed request");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

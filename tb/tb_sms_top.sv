// tb_sms_top: end-to-end test of one staged-memory-scheduler controller at
// its default size (16 CPU cores + 1 GPU, 10/20-entry source FIFOs, 8 banks
// with 15-entry FIFOs, DDR3-1600 timing).
//
// Traffic: six CPU sources of low intensity, six of medium and four of high
// intensity, each with some row locality, and a GPU that streams through
// rows (32 consecutive columns per row, moving to the next bank after each
// row) at a rate the channel cannot sustain. Two phases are run, first with
// p = 1 (always shortest job first), then with p = 0 (always round-robin),
// and the scheduler is drained after each.
//
// Checks: every request completes exactly once with its own address and
// direction; per source and bank, requests complete in the order they were
// accepted; the in-flight counters return to zero; the behavioural DRAM
// sees no protocol violation; the mean CPU latency is lower with p = 1 than
// with p = 0 and the GPU's is higher (the priority shift the parameter p is
// meant to give). Every mechanism of the design (each way a batch becomes
// ready, a full source FIFO, SJF and round-robin picks, a stalled drain, row
// hits, row conflicts, several eligible banks, the tFAW limit) is counted
// and must occur at least once.
module tb_sms_top;
  import sms_pkg::*;

  localparam int NCPU = 16;
  localparam int NS   = NCPU + 1;
  localparam int GPU  = NCPU;
  localparam int PHASE_CYCLES = 12000;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // falling edge resets the asynchronous flops
  always #5 clk = ~clk;

  logic [8:0]    sjf_prob;
  logic [NS-1:0] req_valid, req_ready;
  mem_req_t      req [NS];
  logic          cmd_valid, done_valid;
  dram_cmd_e     cmd;
  logic [BANK_W-1:0] cmd_bank;
  logic [ROW_W-1:0]  cmd_row;
  logic [COL_W-1:0]  cmd_col;
  sched_req_t    done_req;
  logic [7:0]    inflight [NS];
  sms_events_t   events;
  int violations, n_act, n_pre, n_rd, n_wr;

  sms_top dut (
    .clk, .rst_n, .sjf_prob, .req_valid, .req_ready, .req,
    .cmd_valid, .cmd, .cmd_bank, .cmd_row, .cmd_col,
    .done_valid, .done_req, .inflight, .events);

  dram_model u_dram (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_bank, .cmd_row, .cmd_col,
    .violations, .n_act, .n_pre, .n_rd, .n_wr);

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // ------------------------------------------------------------ scoreboard
  mem_req_t outstanding [NS][int];     // by tag
  longint   t_issue     [NS][int];
  int       order_q     [NS][8][$];    // tags per source and bank, in order
  int       next_tag    [NS];
  int       n_issued = 0, n_done = 0, n_bad = 0, n_order_bad = 0;
  real      lat_sum [2][2];            // [phase][cpu=0/gpu=1]
  int       lat_n   [2][2];
  int       phase;
  longint   cyc = 0;

  // event counters
  int ev_src_full = 0, ev_row = 0, ev_age = 0, ev_full = 0, ev_sjf = 0,
      ev_rr = 0, ev_stall = 0, ev_hit = 0, ev_conf = 0, ev_multi = 0,
      ev_faw = 0;

  // ------------------------------------------------------------ traffic
  int  rate_pm   [NS];   // request probability per cycle, per mille
  int  last_row  [NS];
  int  last_bank [NS];
  int  gpu_col = 0, gpu_row = 100, gpu_bank = 0;
  bit  generating;
  logic [NS-1:0] acc;

  function automatic mem_req_t next_req(input int s);
    mem_req_t r;
    r = '0;
    if (s == GPU) begin
      r.addr.bank = BANK_W'(gpu_bank);
      r.addr.row  = ROW_W'(gpu_row);
      r.addr.col  = COL_W'(gpu_col);
      r.we        = ($urandom_range(0, 4) == 0);
      gpu_col++;
      if (gpu_col == 32) begin
        gpu_col  = 0;
        gpu_bank = (gpu_bank + 1) % 8;
        if (gpu_bank == 0) gpu_row++;
      end
    end else begin
      if ($urandom_range(0, 99) < 60) begin
        r.addr.bank = BANK_W'(last_bank[s]);
        r.addr.row  = ROW_W'(last_row[s]);
      end else begin
        last_bank[s] = $urandom_range(0, 7);
        last_row[s]  = 1000 * (s + 1) + $urandom_range(0, 15);
        r.addr.bank  = BANK_W'(last_bank[s]);
        r.addr.row   = ROW_W'(last_row[s]);
      end
      r.addr.col = COL_W'($urandom_range(0, 127));
      r.we       = ($urandom_range(0, 3) == 0);
    end
    r.tag = TAG_W'(next_tag[s]);
    next_tag[s] = (next_tag[s] + 1) % 256;
    return r;
  endfunction

  // One process samples everything 4 time units after each falling edge,
  // when the inputs it drove at the falling edge have settled, and so sees
  // exactly what the next rising edge will act on.
  initial begin
    req_valid = '0;
    sjf_prob  = 9'd256;
    generating = 1'b0;
    for (int s = 0; s < NS; s++) begin
      req[s] = '0; next_tag[s] = 0; last_row[s] = 1000 * (s + 1); last_bank[s] = s % 8;
      rate_pm[s] = (s < 6) ? 4 : (s < 12) ? 25 : (s < 16) ? 80 : 700;
    end
    acc = '0;
    forever begin
      @(negedge clk);
      req_valid = req_valid & ~acc;
      // new requests for sources whose last one was accepted or that are idle
      for (int s = 0; s < NS; s++) begin
        if (!req_valid[s] && generating && $urandom_range(0, 999) < rate_pm[s]) begin
          req[s]       = next_req(s);
          req_valid[s] = 1'b1;
        end
      end
      #4;
      if (rst_n) begin
        cyc++;
        for (int s = 0; s < NS; s++) begin
          if (req_valid[s] && req_ready[s]) begin
            int t;
            t = int'(req[s].tag);
            if (outstanding[s].exists(t)) begin
              n_bad++;
              $display("FAIL: source %0d reuses tag %0d while outstanding", s, t);
            end
            outstanding[s][t] = req[s];
            t_issue[s][t]     = cyc;
            order_q[s][int'(req[s].addr.bank)].push_back(t);
            n_issued++;
          end
        end
        if (done_valid) begin
          int s, t, b;
          s = int'(done_req.src);
          t = int'(done_req.req.tag);
          b = int'(done_req.req.addr.bank);
          n_done++;
          if (s >= NS || !outstanding[s].exists(t)) begin
            n_bad++;
            $display("FAIL: completion of unknown request src %0d tag %0d", s, t);
          end else begin
            if (outstanding[s][t] != done_req.req) begin
              n_bad++;
              $display("FAIL: completion of src %0d tag %0d with wrong contents", s, t);
            end
            if (order_q[s][b].size() == 0 || order_q[s][b][0] != t) begin
              n_order_bad++;
              $display("FAIL: src %0d bank %0d completed tag %0d out of order", s, b, t);
            end else void'(order_q[s][b].pop_front());
            lat_sum[phase][(s == GPU) ? 1 : 0] += real'(cyc - t_issue[s][t]);
            lat_n[phase][(s == GPU) ? 1 : 0]++;
            outstanding[s].delete(t);
          end
        end
        ev_src_full += int'(events.src_full);
        ev_row      += int'(events.ready_by_row);
        ev_age      += int'(events.ready_by_age);
        ev_full     += int'(events.ready_by_full);
        ev_sjf      += int'(events.pick_sjf);
        ev_rr       += int'(events.pick_rr);
        ev_stall    += int'(events.drain_stall);
        ev_hit      += int'(events.row_hit);
        ev_conf     += int'(events.row_conflict);
        ev_multi    += int'(events.multi_eligible);
        ev_faw      += int'(events.faw_block);
      end
      // a request that the coming edge accepts is withdrawn after it
      acc = req_valid & req_ready;
    end
  end

  task automatic run_phase(input int ph, input logic [8:0] p);
    int w;
    phase      = ph;
    sjf_prob   = p;
    generating = 1'b1;
    repeat (PHASE_CYCLES) @(negedge clk);
    generating = 1'b0;
    // wait until every request has completed
    w = 0;
    while ((req_valid != '0 || n_done != n_issued) && w < 20000) begin
      @(negedge clk); w++;
    end
    repeat (10) @(negedge clk);
    check(n_done == n_issued, $sformatf("phase %0d: all %0d accepted requests complete (done %0d)",
                                        ph, n_issued, n_done));
    begin
      int nz; nz = 0;
      for (int s = 0; s < NS; s++) if (inflight[s] != 0) nz++;
      check(nz == 0, $sformatf("phase %0d: in-flight counters back to zero (%0d non-zero)", ph, nz));
    end
  endtask

  initial begin
    phase = 0;
    for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
      lat_sum[a][b] = 0.0; lat_n[a][b] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    run_phase(0, 9'd256);
    run_phase(1, 9'd0);

    check(n_bad == 0, $sformatf("completions match accepted requests (%0d bad)", n_bad));
    check(n_order_bad == 0, $sformatf("per source and bank order kept (%0d bad)", n_order_bad));
    check(violations == 0, $sformatf("no DRAM protocol violations (%0d)", violations));
    check(n_rd + n_wr == n_done, "one column command per completed request");
    begin
      real cpu0, cpu1, gpu0, gpu1;
      cpu0 = lat_sum[0][0] / real'(lat_n[0][0]);
      cpu1 = lat_sum[1][0] / real'(lat_n[1][0]);
      gpu0 = lat_sum[0][1] / real'(lat_n[0][1]);
      gpu1 = lat_sum[1][1] / real'(lat_n[1][1]);
      $display("mean latency in cycles: p=1 CPU %0.1f GPU %0.1f; p=0 CPU %0.1f GPU %0.1f",
               cpu0, gpu0, cpu1, gpu1);
      check(cpu0 < cpu1, "CPU requests are served faster with p = 1 than with p = 0");
      check(gpu0 > gpu1, "GPU requests are served slower with p = 1 than with p = 0");
    end
    $display("requests %0d, ACT %0d, PRE %0d, RD %0d, WR %0d", n_done, n_act, n_pre, n_rd, n_wr);
    $display("events: src_full %0d ready_by_row %0d ready_by_age %0d ready_by_full %0d sjf %0d rr %0d",
             ev_src_full, ev_row, ev_age, ev_full, ev_sjf, ev_rr);
    $display("events: drain_stall %0d row_hit %0d row_conflict %0d multi_eligible %0d faw_block %0d",
             ev_stall, ev_hit, ev_conf, ev_multi, ev_faw);
    check(ev_src_full > 0, "a source FIFO filled up");
    check(ev_row > 0, "a batch became ready by a row change");
    check(ev_age > 0, "a batch became ready by age");
    check(ev_full > 0, "a batch became ready by a full FIFO");
    check(ev_sjf > 0, "a batch was picked by SJF");
    check(ev_rr > 0, "a batch was picked round-robin");
    check(ev_stall > 0, "a drain stalled on a full bank FIFO");
    check(ev_hit > 0, "a row hit was served");
    check(ev_conf > 0, "a row conflict was resolved");
    check(ev_multi > 0, "several banks were eligible at once");
    check(ev_faw > 0, "the tFAW window held back an ACT");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_sms_workloads: runs the default-size controller (16 CPU cores + 1 GPU)
// through synthetic versions of the workload mixes a CPU+GPU system sees,
// one after another, with a drain and a check after each.
//
// Seven intensity mixes of the 16 cores: L (all low), ML (low/medium),
// M (all medium), HL (high/low), HML (high/medium/low), HM (high/medium),
// H (all high), each run with a streaming GPU. Low, medium and high mean a
// request probability of 0.4%, 2.5% and 8% per cycle, each with 60% of
// requests to the core's current row. Then a core-count sweep: 2, 4, 8 and
// 16 active cores of the HML mix plus the GPU, the other ports left idle.
// All runs use p = 0.9 (sjf_prob = 230), a mostly-SJF setting.
//
// Checks, per run: every accepted request completes once with its own
// contents; the in-flight counters return to zero; no DRAM protocol
// violation; the GPU and every active core got requests served. Across the
// mixes: the mean CPU latency of the all-high mix is above that of the
// all-low mix (more contention), and the GPU is served in every mix.
// Traffic lengths are a few thousand cycles per run, far shorter than a
// real workload, so latencies are indicative only.
module tb_sms_workloads;
  import sms_pkg::*;

  localparam int NCPU = 16;
  localparam int NS   = NCPU + 1;
  localparam int GPU  = NCPU;
  localparam int RUN_CYCLES = 4000;
  localparam int NRUNS = 11;

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
  mem_req_t outstanding [NS][int];
  longint   t_issue     [NS][int];
  int       next_tag    [NS];
  int       n_issued = 0, n_done = 0, n_bad = 0;
  int       served      [NS];          // completions of the current run
  real      lat_sum [2];               // current run: [cpu=0/gpu=1]
  int       lat_n   [2];
  longint   cyc = 0;

  // ------------------------------------------------------------ traffic
  int  rate_pm   [NS];
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
      if ($urandom_range(0, 99) >= 60) begin
        last_bank[s] = $urandom_range(0, 7);
        last_row[s]  = 1000 * (s + 1) + $urandom_range(0, 15);
      end
      r.addr.bank = BANK_W'(last_bank[s]);
      r.addr.row  = ROW_W'(last_row[s]);
      r.addr.col  = COL_W'($urandom_range(0, 127));
      r.we        = ($urandom_range(0, 3) == 0);
    end
    r.tag = TAG_W'(next_tag[s]);
    next_tag[s] = (next_tag[s] + 1) % 256;
    return r;
  endfunction

  // Inputs change at the falling edge; everything is sampled 4 time units
  // later, which is what the next rising edge acts on.
  initial begin
    req_valid = '0;
    generating = 1'b0;
    acc = '0;
    for (int s = 0; s < NS; s++) begin
      req[s] = '0; next_tag[s] = 0; last_row[s] = 1000 * (s + 1); last_bank[s] = s % 8;
      rate_pm[s] = 0;
    end
    forever begin
      @(negedge clk);
      req_valid = req_valid & ~acc;
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
            if (outstanding[s].exists(t)) n_bad++;
            outstanding[s][t] = req[s];
            t_issue[s][t]     = cyc;
            n_issued++;
          end
        end
        if (done_valid) begin
          int s, t;
          s = int'(done_req.src);
          t = int'(done_req.req.tag);
          n_done++;
          if (s >= NS || !outstanding[s].exists(t)) n_bad++;
          else begin
            if (outstanding[s][t] != done_req.req) n_bad++;
            lat_sum[(s == GPU) ? 1 : 0] += real'(cyc - t_issue[s][t]);
            lat_n[(s == GPU) ? 1 : 0]++;
            served[s]++;
            outstanding[s].delete(t);
          end
        end
      end
      acc = req_valid & req_ready;
    end
  end

  // intensity of core c in a mix: 0 low, 1 medium, 2 high
  function automatic int level(input string mix, input int c);
    case (mix)
      "L":   return 0;
      "ML":  return (c % 2 == 0) ? 0 : 1;
      "M":   return 1;
      "HL":  return (c % 2 == 0) ? 2 : 0;
      "HML": return (c % 3 == 0) ? 2 : (c % 3 == 1) ? 1 : 0;
      "HM":  return (c % 2 == 0) ? 2 : 1;
      default: return 2;   // "H"
    endcase
  endfunction

  real cpu_lat [NRUNS];

  task automatic run(input int idx, input string mix, input int ncores);
    int w, bad0, viol0, missing;
    string name;
    name = $sformatf("%s/%0d cores", mix, ncores);
    for (int s = 0; s < NS; s++) served[s] = 0;
    lat_sum[0] = 0.0; lat_sum[1] = 0.0; lat_n[0] = 0; lat_n[1] = 0;
    bad0 = n_bad; viol0 = violations;
    for (int c = 0; c < NCPU; c++) begin
      int lv;
      lv = level(mix, c);
      rate_pm[c] = (c >= ncores) ? 0 : (lv == 0) ? 4 : (lv == 1) ? 25 : 80;
    end
    rate_pm[GPU] = 700;
    generating = 1'b1;
    repeat (RUN_CYCLES) @(negedge clk);
    generating = 1'b0;
    w = 0;
    while ((req_valid != '0 || n_done != n_issued) && w < 20000) begin
      @(negedge clk); w++;
    end
    repeat (10) @(negedge clk);
    check(n_done == n_issued, $sformatf("%s: all accepted requests complete", name));
    check(n_bad == bad0, $sformatf("%s: completions match accepted requests", name));
    check(violations == viol0, $sformatf("%s: no DRAM protocol violations", name));
    begin
      int nz; nz = 0;
      for (int s = 0; s < NS; s++) if (inflight[s] != 0) nz++;
      check(nz == 0, $sformatf("%s: in-flight counters back to zero", name));
    end
    missing = 0;
    for (int c = 0; c < ncores; c++) if (served[c] == 0) missing++;
    check(missing == 0, $sformatf("%s: every active core was served (%0d not)", name, missing));
    check(served[GPU] > 0, $sformatf("%s: the GPU was served", name));
    cpu_lat[idx] = (lat_n[0] > 0) ? lat_sum[0] / real'(lat_n[0]) : 0.0;
    $display("%-12s CPU requests %5d mean latency %7.1f | GPU requests %5d mean latency %7.1f",
             name, lat_n[0], cpu_lat[idx], lat_n[1],
             (lat_n[1] > 0) ? lat_sum[1] / real'(lat_n[1]) : 0.0);
  endtask

  initial begin
    automatic string mixes [7] = '{"L", "ML", "M", "HL", "HML", "HM", "H"};
    automatic int    cores [4] = '{2, 4, 8, 16};
    sjf_prob = 9'd230;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    for (int m = 0; m < 7; m++) run(m, mixes[m], NCPU);
    for (int k = 0; k < 4; k++) run(7 + k, "HML", cores[k]);

    check(cpu_lat[6] > cpu_lat[0], "CPU latency of the all-high mix exceeds that of the all-low mix");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

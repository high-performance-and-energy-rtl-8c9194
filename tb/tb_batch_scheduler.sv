// tb_batch_scheduler: self-checking test of the stage-2 batch scheduler.
//
// The four batch formers are replaced by a small model in the testbench:
// each source holds one head batch of a given length whose requests carry
// tags source*16 + index; head_last is set on the last one. The test checks
//   * SJF (p = 1): the ready source with the fewest in-flight requests wins,
//     ties go to the older batch, then to the lower index;
//   * round-robin (p = 0): ready sources are served in cyclic order;
//   * the drain: one request per cycle in order, grant one cycle before the
//     first request, a batch of n requests takes n+1 cycles, and nothing is
//     popped while out_ready is low;
//   * the mix: with p = 64/256 and 192/256 the share of SJF picks over 2000
//     picks is within 0.06 of p.
module tb_batch_scheduler;
  import sms_pkg::*;

  localparam int unsigned NS = 4;
  localparam int unsigned CW = 6;

  logic clk = 1'b0, rst_n = 1'b1;

  // a falling edge on rst_n at 1 ns resets the asynchronous flops
  initial #1 rst_n = 1'b0;
  logic [8:0] sjf_prob;
  logic [NS-1:0] batch_ready, head_last, grant, pop;
  mem_req_t head_req [NS];
  logic [TS_W-1:0] head_age [NS];
  logic [CW-1:0] inflight [NS];
  logic out_valid, out_ready, pick_sjf, pick_rr, drain_stall, draining;
  sched_req_t out_req;
  int checks = 0, failures = 0;

  int blen [NS];   // requests left in the head batch
  int bidx [NS];   // index of the head request within its batch

  always #5 clk = ~clk;

  batch_scheduler #(.NUM_SRC(NS), .CNT_W(CW)) dut (
    .clk, .rst_n, .sjf_prob, .batch_ready, .head_req, .head_last, .head_age,
    .inflight, .grant, .pop, .out_valid, .out_req, .out_ready,
    .pick_sjf, .pick_rr, .drain_stall, .draining);

  always_comb begin
    for (int s = 0; s < NS; s++) begin
      head_req[s]     = '0;
      head_req[s].tag = TAG_W'(s * 16 + bidx[s]);
      head_req[s].addr.bank = BANK_W'(s);
      head_last[s]    = (blen[s] == 1);
    end
  end

  // The model pops on the clock edge, like a batch former. The test samples
  // one time unit after each falling edge, once the block's combinational
  // outputs have settled on the inputs the test just set.
  always @(posedge clk) begin
    for (int s = 0; s < NS; s++) begin
      if (pop[s]) begin
        blen[s] <= blen[s] - 1;
        bidx[s] <= bidx[s] + 1;
      end
    end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic set_batch(input int s, input int len, input int age, input int infl);
    blen[s]     = len;
    bidx[s]     = 0;
    head_age[s] = TS_W'(age);
    inflight[s] = CW'(infl);
    batch_ready = batch_ready | NS'(1 << s);
  endtask

  // Wait for the grant, check who got it, then follow the drain and check
  // its order and length. stall_at >= 0 holds out_ready low for 3 cycles
  // starting at that request.
  task automatic expect_batch(input int src, input int len, input int stall_at);
    int cyc, got;
    #1;
    cyc = 0;
    while (grant == '0 && cyc < 50) begin @(negedge clk) #1; cyc++; end
    check(grant == NS'(1 << src), $sformatf("grant to source %0d (got %b)", src, grant));
    @(negedge clk) #1;
    batch_ready = batch_ready & ~NS'(1 << src);
    got = 0;
    cyc = 1;
    while (got < len && cyc < 100) begin
      if (got == stall_at && cyc < 100) begin
        out_ready = 1'b0;
        #1;
        repeat (3) begin
          check(out_valid && drain_stall && pop == '0, "stalled drain holds, pops nothing");
          @(negedge clk) #1; cyc++;
        end
        out_ready = 1'b1;
        #1;
        stall_at = -1;
      end
      check(out_valid && pop == NS'(1 << src), $sformatf("drain of source %0d pops it", src));
      check(out_req.src == SRC_W'(src) && out_req.req.tag == TAG_W'(src * 16 + got),
            $sformatf("request %0d of source %0d in order (got src %0d tag %0d)",
                      got, src, out_req.src, out_req.req.tag));
      got++;
      @(negedge clk) #1; cyc++;
    end
    check(!draining, "back to picking after the last request");
  endtask

  // Same, and also check the occupancy: the grant cycle plus len drain
  // cycles, so the sample after the last pop is len cycles after the grant.
  task automatic expect_timed(input int src, input int len);
    longint t0, t1;
    #1;
    while (grant == '0) @(negedge clk) #1;
    t0 = $time;
    expect_batch(src, len, -1);
    t1 = $time;
    check((t1 - t0) / 10 == len, $sformatf("batch of %0d drains %0d cycles after grant (got %0d)",
          len, len, (t1 - t0) / 10));
  endtask

  initial begin
    sjf_prob = 9'd256; batch_ready = '0; out_ready = 1'b1;
    for (int s = 0; s < NS; s++) begin
      blen[s] = 0; bidx[s] = 0; head_age[s] = '0; inflight[s] = '0;
    end
    repeat (2) @(negedge clk) #1;
    rst_n = 1'b1;

    // ---- SJF: fewest in flight wins
    set_batch(0, 3, 50, 9);
    set_batch(2, 2, 10, 2);
    set_batch(3, 4, 90, 5);
    expect_timed(2, 2);
    // ---- then source 3 (5 in flight) before source 0 (9)
    expect_timed(3, 4);
    // ---- tie on in-flight count: the older batch wins
    set_batch(1, 2, 80, 9);   // source 0 has age 50, 9 in flight
    expect_batch(1, 2, -1);
    // ---- full tie: lower index
    set_batch(1, 1, 50, 9);
    expect_batch(0, 3, 1);    // also stalls the drain at its second request
    expect_batch(1, 1, -1);

    // ---- round-robin: cyclic order regardless of in-flight counts
    sjf_prob = 9'd0;
    @(negedge clk) #1;
    check(grant == '0, "nothing ready, nothing granted");
    set_batch(0, 1, 0, 0);
    set_batch(1, 1, 0, 30);
    set_batch(2, 2, 0, 1);
    set_batch(3, 1, 0, 40);
    // last round-robin pick so far: none, pointer starts before source 0
    expect_batch(0, 1, -1);
    set_batch(0, 1, 0, 0);
    expect_batch(1, 1, -1);
    expect_batch(2, 2, -1);
    expect_batch(3, 1, -1);
    expect_batch(0, 1, -1);

    // ---- probability p
    for (int pi = 0; pi < 2; pi++) begin
      int n_sjf, n_rr;
      real share, p;
      sjf_prob = (pi == 0) ? 9'd64 : 9'd192;
      p = real'(sjf_prob) / 256.0;
      n_sjf = 0; n_rr = 0;
      for (int s = 0; s < NS; s++) set_batch(s, 1000000, 0, s);
      while (n_sjf + n_rr < 2000) begin
        @(negedge clk) #1;
        if (pick_sjf) n_sjf++;
        if (pick_rr)  n_rr++;
        // keep batches one request long so the scheduler keeps picking
        for (int s = 0; s < NS; s++) blen[s] = 1;
      end
      share = real'(n_sjf) / 2000.0;
      check(share > p - 0.06 && share < p + 0.06,
            $sformatf("SJF share %f for p = %f", share, p));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

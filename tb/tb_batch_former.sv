// tb_batch_former: self-checking test of the stage-1 batch former.
//
// Uses a 4-entry FIFO and an age threshold of 20 cycles and walks through
// the three ways a batch becomes ready (a request to a different row, the
// age threshold, a full FIFO), the closing of a batch on grant, the
// head_last marking and the FIFO order of the data. The expected values are
// written out by hand from the batch definition, not taken from the block.
module tb_batch_former;
  import sms_pkg::*;

  localparam int unsigned DEPTH = 4;
  localparam int unsigned AGE   = 20;

  logic clk = 1'b0, rst_n = 1'b1;

  // a falling edge on rst_n at 1 ns resets the asynchronous flops
  initial #1 rst_n = 1'b0;
  logic in_valid, in_ready, head_valid, head_last, batch_ready, grant, pop;
  mem_req_t in_req, head_req;
  logic [TS_W-1:0] head_age;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic r_row, r_age, r_full;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  batch_former #(.DEPTH(DEPTH), .AGE_THRESH(AGE)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_req,
    .head_valid, .head_req, .head_last, .head_age, .batch_ready,
    .grant, .pop, .count,
    .ready_by_row(r_row), .ready_by_age(r_age), .ready_by_full(r_full));

  function automatic mem_req_t mk(input int bank, input int row, input int tag);
    mem_req_t r;
    r.addr.bank = BANK_W'(bank);
    r.addr.row  = ROW_W'(row);
    r.addr.col  = COL_W'(tag);
    r.we        = tag[0];
    r.tag       = TAG_W'(tag);
    return r;
  endfunction

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic push(input mem_req_t r);
    @(negedge clk);
    in_valid = 1'b1;
    in_req   = r;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  // pop the head at the next edge and check its tag and head_last
  task automatic pop_check(input int tag, input logic last);
    @(negedge clk);
    check(head_valid, $sformatf("head valid before pop of tag %0d", tag));
    check(head_req.tag == TAG_W'(tag), $sformatf("head tag %0d (got %0d)", tag, head_req.tag));
    check(head_last == last, $sformatf("head_last of tag %0d is %0b", tag, last));
    pop = 1'b1;
    @(negedge clk);
    pop = 1'b0;
  endtask

  task automatic do_grant();
    @(negedge clk);
    grant = 1'b1;
    @(negedge clk);
    grant = 1'b0;
  endtask

  initial begin
    in_valid = 1'b0; in_req = '0; grant = 1'b0; pop = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1. Same-row requests only: ready exactly when the oldest is AGE old.
    begin
      int t0, waited;
      @(negedge clk);
      in_valid = 1'b1; in_req = mk(1, 5, 1);
      @(posedge clk); t0 = 0;
      @(negedge clk); in_req = mk(1, 5, 2);
      @(negedge clk); in_req = mk(1, 5, 3);
      @(negedge clk); in_valid = 1'b0;
      check(count == 3, "three requests queued");
      check(!batch_ready, "same-row batch not ready while young");
      waited = 0;
      while (!batch_ready && waited < 100) begin
        @(negedge clk); waited++;
      end
      // accepted at edge e0; head visible from e0; age counts cycles since e0
      check(r_age && !r_row && !r_full, "ready by age only");
      check(head_age == TS_W'(AGE), $sformatf("ready at age %0d (got %0d)", AGE, head_age));
      check(waited == AGE - 3, $sformatf("age threshold reached after %0d more cycles (got %0d)", AGE - 3, waited));
      do_grant();
      pop_check(1, 1'b0);
      pop_check(2, 1'b0);
      pop_check(3, 1'b1);
      check(!head_valid && count == 0, "FIFO empty after draining the batch");
    end

    // 2. A request to a different row closes the batch.
    push(mk(2, 7, 4));
    push(mk(2, 7, 5));
    check(!batch_ready, "open batch of two is not ready");
    push(mk(2, 8, 6));
    check(batch_ready && r_row && !r_age, "ready because a different row arrived");
    // same bank, same row as request 6: joins its batch
    push(mk(2, 8, 7));
    check(!in_ready && r_full, "four entries fill the FIFO");
    do_grant();
    pop_check(4, 1'b0);
    pop_check(5, 1'b1);
    // different bank, same row number: a new batch
    push(mk(3, 8, 8));
    check(batch_ready && r_row && !r_full, "second batch ready (a later batch exists)");
    do_grant();
    pop_check(6, 1'b0);
    pop_check(7, 1'b1);
    check(head_valid && !batch_ready, "single young batch left, not ready");

    // 3. Closing on grant: a same-row request arriving during the drain
    //    starts a new batch.
    begin
      int w; w = 0;
      while (!batch_ready && w < 100) begin @(negedge clk); w++; end
      check(batch_ready && r_age, "remaining batch ready by age");
      do_grant();
      push(mk(3, 8, 9));
      pop_check(8, 1'b1);
      check(head_valid && head_req.tag == 9, "new batch behind the drained one");
      check(!batch_ready, "new batch is not ready yet");
    end

    // 4. A full FIFO of one row makes the batch ready at once.
    push(mk(4, 1, 10));
    push(mk(4, 1, 11));
    push(mk(4, 1, 12));
    // tag 9 (bank 3 row 8) is the head batch; tags 10..12 a later batch
    check(r_row, "head batch ready because a later batch exists");
    do_grant();
    pop_check(9, 1'b1);
    push(mk(4, 1, 13));
    check(count == 4 && !in_ready, "FIFO full again");
    check(r_full && !r_row, "ready by full (one batch of four)");
    do_grant();
    pop_check(10, 1'b0);
    pop_check(11, 1'b0);
    pop_check(12, 1'b0);
    pop_check(13, 1'b1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

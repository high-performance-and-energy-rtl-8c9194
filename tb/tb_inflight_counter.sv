// tb_inflight_counter: self-checking test of the per-source in-flight
// counters. Random acceptances (several sources per cycle) and completions
// (at most one per cycle, only of a source with requests outstanding) are
// applied for 2000 cycles; a reference array kept in the testbench is
// compared with the counters after every clock edge. The run ends early
// after 20 mismatches, since a wrong counter stays wrong.
module tb_inflight_counter;
  import sms_pkg::*;

  localparam int unsigned NS = 5;
  localparam int unsigned CW = 6;

  logic clk = 1'b0, rst_n = 1'b1;

  // a falling edge on rst_n at 1 ns resets the asynchronous flops
  initial #1 rst_n = 1'b0;
  logic [NS-1:0] inc;
  logic dec_valid;
  logic [SRC_W-1:0] dec_src;
  logic [CW-1:0] count [NS];
  int ref_cnt [NS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  inflight_counter #(.NUM_SRC(NS), .CNT_W(CW)) dut (
    .clk, .rst_n, .inc, .dec_valid, .dec_src, .count);

  initial begin
    inc = '0; dec_valid = 1'b0; dec_src = '0;
    foreach (ref_cnt[s]) ref_cnt[s] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++) begin
        checks++;
        if (int'(count[s]) != ref_cnt[s]) begin
          failures++;
          $display("FAIL: cycle %0d source %0d count %0d expected %0d", cyc, s, count[s], ref_cnt[s]);
        end
      end
      // a broken counter drifts further every cycle; stop once it is clear
      if (failures >= 20) break;
      // drive the next cycle's events
      for (int s = 0; s < NS; s++)
        inc[s] = (ref_cnt[s] < 40) && ($urandom_range(0, 2) == 0);
      dec_valid = 1'b0;
      begin
        int s;
        s = $urandom_range(0, NS-1);
        if (ref_cnt[s] > 0 && $urandom_range(0, 1) == 0) begin
          dec_valid = 1'b1;
          dec_src   = SRC_W'(s);
        end
      end
      for (int s = 0; s < NS; s++) begin
        ref_cnt[s] += int'(inc[s]);
        if (dec_valid && int'(dec_src) == s) ref_cnt[s] -= 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

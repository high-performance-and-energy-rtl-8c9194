// dram_model: behavioural stand-in for the DRAM devices of one channel,
// used only by the testbenches. It is not synthesizable logic and has no
// data storage: it follows the commands on the command bus, keeps the state
// of every bank (precharged, or open with a row) and the time of every past
// command, and counts each command that breaks the DDR3 protocol rules
// listed below. The rules are written from absolute command times, a
// different formulation from the down-counters in the scheduler, so the two
// can check each other.
//
//   ACT : bank precharged; >= tRP after its PRE; >= tRRD after any ACT;
//         >= tFAW after the fourth-last ACT
//   PRE : bank open; >= tRAS after its ACT; >= tRTP after its last RD;
//         >= tCWL+tBURST+tWR after its last WR
//   RD/WR: bank open with the addressed row; >= tRCD after its ACT;
//         >= tCCD after a column command of the same kind;
//         RD >= tCWL+tBURST+tWTR after the last WR;
//         the burst must not overlap the previous burst on the data bus.
module dram_model
  import sms_pkg::*;
#(
  parameter int NUM_BANKS = 8,
  parameter longint T_RCD = 11, parameter longint T_RP = 11, parameter longint T_RAS = 28,
  parameter longint T_CL = 11, parameter longint T_CWL = 8, parameter longint T_BURST = 4,
  parameter longint T_CCD = 4, parameter longint T_RRD = 5, parameter longint T_FAW = 24,
  parameter longint T_WR = 12, parameter longint T_WTR = 6, parameter longint T_RTP = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  dram_cmd_e         cmd,
  input  logic [BANK_W-1:0] cmd_bank,
  input  logic [ROW_W-1:0]  cmd_row,
  input  logic [COL_W-1:0]  cmd_col,
  output int                violations,
  output int                n_act,
  output int                n_pre,
  output int                n_rd,
  output int                n_wr
);

  localparam longint NEVER = -100000;

  longint now;
  bit     open_b   [NUM_BANKS];
  int     row_b    [NUM_BANKS];
  longint t_act    [NUM_BANKS];
  longint t_pre    [NUM_BANKS];
  longint t_rd     [NUM_BANKS];
  longint t_wr     [NUM_BANKS];
  longint act_hist [4];
  longint t_act_any, t_rd_any, t_wr_any, bus_free;

  task automatic bad(input string what);
    violations++;
    $display("DRAM PROTOCOL: %s at cycle %0d (bank %0d)", what, now, cmd_bank);
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now = 0; violations = 0; n_act = 0; n_pre = 0; n_rd = 0; n_wr = 0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        open_b[b] = 0; row_b[b] = 0;
        t_act[b] = NEVER; t_pre[b] = NEVER; t_rd[b] = NEVER; t_wr[b] = NEVER;
      end
      for (int i = 0; i < 4; i++) act_hist[i] = NEVER;
      t_act_any = NEVER; t_rd_any = NEVER; t_wr_any = NEVER; bus_free = 0;
    end else begin
      if (cmd_valid && cmd != CMD_NOP) begin
        int b;
        b = int'(cmd_bank);
        if (b >= NUM_BANKS) bad("bank out of range");
        else case (cmd)
          CMD_ACT: begin
            n_act++;
            if (open_b[b])                      bad("ACT to an open bank");
            if (now - t_pre[b] < T_RP)          bad("tRP");
            if (now - t_act_any < T_RRD)        bad("tRRD");
            if (now - act_hist[0] < T_FAW)      bad("tFAW");
            open_b[b] = 1; row_b[b] = int'(cmd_row);
            t_act[b] = now; t_act_any = now;
            act_hist[0] = act_hist[1]; act_hist[1] = act_hist[2];
            act_hist[2] = act_hist[3]; act_hist[3] = now;
          end
          CMD_PRE: begin
            n_pre++;
            if (!open_b[b])                     bad("PRE to a closed bank");
            if (now - t_act[b] < T_RAS)         bad("tRAS");
            if (now - t_rd[b] < T_RTP)          bad("tRTP");
            if (now - t_wr[b] < T_CWL + T_BURST + T_WR) bad("tWR");
            open_b[b] = 0; t_pre[b] = now;
          end
          CMD_RD, CMD_WR: begin
            longint start;
            if (!open_b[b])                     bad("column command to a closed bank");
            else if (row_b[b] != int'(cmd_row)) bad("column command to a row that is not open");
            if (now - t_act[b] < T_RCD)         bad("tRCD");
            if (cmd == CMD_RD) begin
              n_rd++;
              if (now - t_rd_any < T_CCD)       bad("tCCD (RD)");
              if (now - t_wr_any < T_CWL + T_BURST + T_WTR) bad("tWTR");
              start = now + T_CL;
              t_rd[b] = now; t_rd_any = now;
            end else begin
              n_wr++;
              if (now - t_wr_any < T_CCD)       bad("tCCD (WR)");
              start = now + T_CWL;
              t_wr[b] = now; t_wr_any = now;
            end
            if (start < bus_free)               bad("data bus overlap");
            bus_free = start + T_BURST;
          end
          default: ;
        endcase
      end
      now++;
    end
  end

endmodule

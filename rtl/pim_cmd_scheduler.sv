// pim_cmd_scheduler: chip-level PIM command scheduler.
//
// Watches the head of every bank-group command queue and decides, each
// cycle, what each group may do. It keeps the state of every bank (open row)
// and per-bank counters of the cycles since its last activate and precharge,
// a per-group counter since the last column command, and chip-wide counters
// for the activate-to-activate delay and the four-activate window. For a
// read or write whose row is not open it first precharges (after tRAS) and
// activates (after tRP, tRRD and tFAW), then issues the column command once
// tRCD and tCCDL allow, and pops the queue ('issuable'). An ACT command just
// opens its row; compute-only commands pop at once. Commands of the BPUs go
// to all four banks of a group together and count as one activation. At most
// one activate per cycle per chip is granted, round-robin over the groups.
// Timings are in cycles of the 500 MHz logic clock. The constraints handled
// follow the paper; the open-row policy and arbitration are this design's own.
module pim_cmd_scheduler
  import darwin_pkg::*;
#(
  parameter int NUM_BG    = 4,
  parameter int NUM_BANKS = 4,
  parameter int TRCD      = T_RCD,
  parameter int TRAS      = T_RAS,
  parameter int TRP       = T_RP,
  parameter int TRRD      = T_RRD,
  parameter int TFAW      = T_FAW,
  parameter int TCCDL     = T_CCDL
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_BG-1:0] head_valid,
  input  pim_cmd_t          head [NUM_BG],
  output logic [NUM_BG-1:0] issuable,
  output dram_cmd_t         bank_cmd [NUM_BG][NUM_BANKS]
);

  localparam int CW = 6;
  localparam logic [CW-1:0] SAT = '1;
  // each counter holds the cycles elapsed since its event: it is set to 1
  // in the cycle after the event and saturates at SAT

  logic [NUM_BANKS-1:0]   open   [NUM_BG];
  logic [ROW_W-1:0]       orow   [NUM_BG][NUM_BANKS];
  logic [CW-1:0]          c_act  [NUM_BG][NUM_BANKS];
  logic [CW-1:0]          c_pre  [NUM_BG][NUM_BANKS];
  logic [CW-1:0]          c_col  [NUM_BG];
  logic [CW-1:0]          c_rrd;
  logic [CW-1:0]          faw_age [4];
  logic [$clog2(NUM_BG)-1:0] rr;

  logic [NUM_BANKS-1:0] tm      [NUM_BG];
  logic [NUM_BANKS-1:0] pre_set [NUM_BG];
  logic [NUM_BANKS-1:0] act_set [NUM_BG];
  logic [NUM_BG-1:0]    want_pre, want_act, want_col, col_ok, pre_ok, act_ok, pass;
  logic [NUM_BG-1:0]    act_grant;

  always_comb begin
    for (int g = 0; g < NUM_BG; g++) begin
      logic any_wrong, any_closed;
      tm[g] = head[g].all_banks ? '1 : NUM_BANKS'(1) << head[g].bank;
      pre_set[g] = '0;
      act_set[g] = '0;
      any_wrong  = 1'b0;
      any_closed = 1'b0;
      pre_ok[g]  = 1'b1;
      act_ok[g]  = 1'b1;
      col_ok[g]  = (c_col[g] >= CW'(TCCDL));
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (tm[g][b]) begin
          if (open[g][b] && orow[g][b] != head[g].row) begin
            any_wrong     = 1'b1;
            pre_set[g][b] = 1'b1;
            if (c_act[g][b] < CW'(TRAS)) pre_ok[g] = 1'b0;
          end
          if (!open[g][b]) begin
            any_closed    = 1'b1;
            act_set[g][b] = 1'b1;
            if (c_pre[g][b] < CW'(TRP)) act_ok[g] = 1'b0;
          end
          if (c_act[g][b] < CW'(TRCD)) col_ok[g] = 1'b0;
        end
      end
      pass[g]     = head_valid[g] && (head[g].typ == CMD_COMP || head[g].typ == CMD_NOP ||
                                      head[g].typ == CMD_PRE);
      want_pre[g] = head_valid[g] && !pass[g] && any_wrong;
      want_act[g] = head_valid[g] && !pass[g] && !any_wrong && any_closed;
      want_col[g] = head_valid[g] && !pass[g] && !any_wrong && !any_closed;
    end
  end

  // one activate per cycle, round-robin, subject to tRRD and tFAW
  logic chip_act_ok;
  assign chip_act_ok = (c_rrd >= CW'(TRRD)) && (faw_age[3] >= CW'(TFAW));

  logic act_found;
  always_comb begin
    act_grant = '0;
    act_found = 1'b0;
    for (int o = 0; o < NUM_BG; o++) begin
      if (!act_found && chip_act_ok && want_act[(int'(rr) + o) % NUM_BG] &&
          act_ok[(int'(rr) + o) % NUM_BG]) begin
        act_grant[(int'(rr) + o) % NUM_BG] = 1'b1;
        act_found = 1'b1;
      end
    end
  end

  always_comb begin
    for (int g = 0; g < NUM_BG; g++) begin
      issuable[g] = pass[g] ||
                    (want_col[g] && head[g].typ == CMD_ACT) ||
                    (want_col[g] && col_ok[g] && (head[g].typ == CMD_RD || head[g].typ == CMD_WR));
      for (int b = 0; b < NUM_BANKS; b++) begin
        bank_cmd[g][b]     = '0;
        bank_cmd[g][b].typ = CMD_NOP;
        bank_cmd[g][b].row = head[g].row;
        bank_cmd[g][b].col = head[g].col;
        if (want_pre[g] && pre_ok[g] && pre_set[g][b]) bank_cmd[g][b].typ = CMD_PRE;
        if (act_grant[g] && act_set[g][b])             bank_cmd[g][b].typ = CMD_ACT;
        if (issuable[g] && tm[g][b] && (head[g].typ == CMD_RD || head[g].typ == CMD_WR))
          bank_cmd[g][b].typ = head[g].typ;
      end
    end
  end

  function automatic logic [CW-1:0] sat_inc(input logic [CW-1:0] v);
    sat_inc = (v == SAT) ? v : v + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NUM_BG; g++) begin
        open[g]  <= '0;
        c_col[g] <= SAT;
        for (int b = 0; b < NUM_BANKS; b++) begin
          orow[g][b]  <= '0;
          c_act[g][b] <= SAT;
          c_pre[g][b] <= SAT;
        end
      end
      c_rrd <= SAT;
      for (int f = 0; f < 4; f++) faw_age[f] <= SAT;
      rr <= '0;
    end else begin
      c_rrd <= (|act_grant) ? CW'(1) : sat_inc(c_rrd);
      if (|act_grant) begin
        faw_age[0] <= CW'(1);
        for (int f = 1; f < 4; f++) faw_age[f] <= sat_inc(faw_age[f-1]);
      end else begin
        for (int f = 0; f < 4; f++) faw_age[f] <= sat_inc(faw_age[f]);
      end
      if (|act_grant) rr <= rr + 1'b1;
      for (int g = 0; g < NUM_BG; g++) begin
        c_col[g] <= (issuable[g] && (head[g].typ == CMD_RD || head[g].typ == CMD_WR)) ? CW'(1) : sat_inc(c_col[g]);
        for (int b = 0; b < NUM_BANKS; b++) begin
          unique case (bank_cmd[g][b].typ)
            CMD_PRE: begin
              open[g][b]  <= 1'b0;
              c_pre[g][b] <= CW'(1);
              c_act[g][b] <= sat_inc(c_act[g][b]);
            end
            CMD_ACT: begin
              open[g][b]  <= 1'b1;
              orow[g][b]  <= head[g].row;
              c_act[g][b] <= CW'(1);
              c_pre[g][b] <= sat_inc(c_pre[g][b]);
            end
            default: begin
              c_act[g][b] <= sat_inc(c_act[g][b]);
              c_pre[g][b] <= sat_inc(c_pre[g][b]);
            end
          endcase
        end
      end
    end
  end

  // a column command only reaches open banks of the right row
  for (genvar g = 0; g < NUM_BG; g++) begin : g_chk
    for (genvar b = 0; b < NUM_BANKS; b++) begin : g_b
      a_col_open: assert property (@(posedge clk) disable iff (!rst_n)
        (bank_cmd[g][b].typ == CMD_RD || bank_cmd[g][b].typ == CMD_WR) |->
          (open[g][b] && orow[g][b] == bank_cmd[g][b].row && c_act[g][b] >= CW'(TRCD)));
    end
  end

endmodule

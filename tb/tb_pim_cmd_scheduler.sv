// tb_pim_cmd_scheduler: four bank groups present random command streams
// (reads and writes to one or all banks, row-opens, compute-only commands;
// few rows, so row conflicts are frequent). A monitor here keeps its own bank
// state and checks every issued activate, precharge and column command
// against tRCD, tRAS, tRP, tRRD, tFAW and tCCDL, that a column command hits
// the requested open row in exactly the requested banks, that every command
// is eventually issued in order, and that a stream of row hits in one group
// runs at one column command per tCCDL.
module tb_pim_cmd_scheduler;
  import darwin_pkg::*;
  localparam int G = 4, B = 4;
  logic clk = 0, rst_n = 0;
  logic [G-1:0] head_valid = '0, issuable;
  pim_cmd_t head [G];
  dram_cmd_t bank_cmd [G][B];
  int checks = 0, failures = 0;

  pim_cmd_scheduler dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- monitor
  int cyc = 0;
  int last_act [G][B], last_pre [G][B], last_col [G];
  bit is_open [G][B];
  int orw [G][B];
  int act_hist [$];
  int n_act = 0, n_pre = 0, n_col = 0;
  initial begin
    for (int g = 0; g < G; g++) begin
      last_col[g] = -100;
      for (int b = 0; b < B; b++) begin last_act[g][b] = -100; last_pre[g][b] = -100; is_open[g][b] = 0; end
    end
  end

  task automatic fail(string m);
    failures++;
    $display("FAIL %s at cycle %0d", m, cyc);
  endtask

  always @(posedge clk) if (rst_n) begin
    bit any_act;
    any_act = 0;
    for (int g = 0; g < G; g++) begin
      bit col_seen;
      col_seen = 0;
      for (int b = 0; b < B; b++) begin
        case (bank_cmd[g][b].typ)
          CMD_ACT: begin
            checks += 2; n_act++;
            if (is_open[g][b]) fail("ACT to open bank");
            if (cyc - last_pre[g][b] < T_RP) fail("tRP");
            is_open[g][b] = 1; orw[g][b] = bank_cmd[g][b].row; last_act[g][b] = cyc; any_act = 1;
          end
          CMD_PRE: begin
            checks += 2; n_pre++;
            if (!is_open[g][b]) fail("PRE to closed bank");
            if (cyc - last_act[g][b] < T_RAS) fail("tRAS");
            is_open[g][b] = 0; last_pre[g][b] = cyc;
          end
          CMD_RD, CMD_WR: begin
            checks += 3; n_col++;
            if (!is_open[g][b] || orw[g][b] != bank_cmd[g][b].row) fail("column to wrong row");
            if (cyc - last_act[g][b] < T_RCD) fail("tRCD");
            if (cyc - last_col[g] < T_CCDL) fail("tCCDL");
            col_seen = 1;
          end
          default: ;
        endcase
      end
      if (col_seen) last_col[g] = cyc;
    end
    if (any_act) begin
      checks += 2;
      if (act_hist.size() > 0 && cyc - act_hist[$] < T_RRD) fail("tRRD");
      if (act_hist.size() >= 4 && cyc - act_hist[act_hist.size()-4] < T_FAW) fail("tFAW");
      act_hist.push_back(cyc);
      if (act_hist.size() > 8) void'(act_hist.pop_front());
    end
    cyc++;
  end

  // ---------------- stimulus: one command queue per group
  pim_cmd_t q [G][$];
  int issued [G];
  int hit_first = -1, hit_last = -1, hit_n = 0;

  always_comb for (int g = 0; g < G; g++) begin
    head_valid[g] = (q[g].size() > 0);
    head[g]       = (q[g].size() > 0) ? q[g][0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    for (int g = 0; g < G; g++) if (head_valid[g] && issuable[g]) begin
      pim_cmd_t c;
      c = q[g][0];
      // the issued column command must reach exactly the addressed banks
      for (int b = 0; b < B; b++) if (c.typ == CMD_RD || c.typ == CMD_WR) begin
        checks++;
        if ((bank_cmd[g][b].typ == c.typ) != (c.all_banks || c.bank == 2'(b))) fail("bank select");
      end
      if (g == 0 && c.aux == 8'hEE) begin
        if (hit_first < 0) hit_first = cyc;
        hit_last = cyc; hit_n++;
      end
      void'(q[g].pop_front());
      issued[g]++;
    end
  end

  function automatic pim_cmd_t rnd_cmd();
    pim_cmd_t c;
    int r;
    c = '0;
    r = $urandom_range(0, 9);
    c.typ = (r < 4) ? CMD_RD : (r < 7) ? CMD_WR : (r < 8) ? CMD_ACT : CMD_COMP;
    c.all_banks = $urandom_range(0, 1);
    c.bank = 2'($urandom);
    c.row = 14'($urandom_range(0, 2));
    c.col = 6'($urandom);
    return c;
  endfunction

  initial begin
    int total;
    repeat (2) @(posedge clk);
    rst_n = 1;
    total = 0;
    for (int g = 0; g < G; g++) begin
      issued[g] = 0;
      for (int i = 0; i < 400; i++) begin q[g].push_back(rnd_cmd()); total++; end
    end
    while (q[0].size() + q[1].size() + q[2].size() + q[3].size() != 0) @(posedge clk);
    checks++;
    if (issued[0] + issued[1] + issued[2] + issued[3] != total) fail("lost commands");
    // rate: 32 reads of one open row in group 0
    repeat (5) @(posedge clk);
    for (int i = 0; i < 33; i++) begin
      pim_cmd_t c;
      c = '0; c.typ = CMD_RD; c.all_banks = 1; c.row = 14'd7; c.col = 6'(i);
      c.aux = (i == 0) ? 8'h00 : 8'hEE;
      q[0].push_back(c);
    end
    while (q[0].size() != 0) @(posedge clk);
    checks++;
    if (hit_n != 32 || hit_last - hit_first != 31 * T_CCDL) fail($sformatf("row-hit rate %0d cycles for %0d", hit_last - hit_first, hit_n));
    $display("acts %0d pres %0d column commands %0d", n_act, n_pre, n_col);
    checks++;
    if (n_act == 0 || n_pre == 0) fail("no row conflicts exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

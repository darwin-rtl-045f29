// tb_pim_inst_decoder: feeds BPU, data-movement and BGPU instructions and
// checks the command sequence each one expands to, including the column
// sequence (0,0),(1,2),(2,4),(3,6) for steps of 1 and 2, negative steps,
// nCMD = 0, back-pressure on cmd_ready and the one-command-per-cycle rate.
module tb_pim_inst_decoder;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0, inst_valid = 0, inst_ready, cmd_valid, cmd_ready = 1, cfg_valid;
  logic [63:0] inst = '0;
  pim_cmd_t cmd;
  bgpu_inst_t cfg;
  int checks = 0, failures = 0;
  pim_cmd_t exp_q[$];
  int cyc = 0, n_seen = 0, first_cyc = -1, last_cyc = -1;

  pim_inst_decoder dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && cmd_valid && cmd_ready) begin
    checks++;
    if (first_cyc < 0) first_cyc = cyc;
    last_cyc = cyc; n_seen++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected command"); end
    else begin
      if (cmd != exp_q[0]) begin
        failures++;
        $display("FAIL cmd typ %0d col %0d col2 %0d idx %0d exp typ %0d col %0d col2 %0d idx %0d",
                 cmd.typ, cmd.col, cmd.col2, cmd.idx, exp_q[0].typ, exp_q[0].col, exp_q[0].col2, exp_q[0].idx);
      end
      void'(exp_q.pop_front());
    end
  end

  task automatic send(logic [63:0] w);
    @(negedge clk);
    while (!inst_ready) @(negedge clk);
    inst = w; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
  endtask

  task automatic wait_idle();
    while (exp_q.size() != 0 || !inst_ready) @(negedge clk);
  endtask

  function automatic logic [5:0] off(int base, int k, int step);
    return 6'((base + k * step) & 63);
  endfunction

  task automatic bpu_case(bpu_op_e op, int src, int c1, int c2, int n, int s1, int s2);
    bpu_inst_t b;
    b = '0;
    b.id = 6'd5; b.cat = CAT_BPU; b.op = op; b.row = 14'($urandom); b.col1 = 6'(c1); b.col2 = 6'(c2);
    b.src = 3'(src); b.dst = LOC_ROWA; b.perm = 3'($urandom); b.ncmd = 7'(n);
    b.step1 = 5'(s1); b.step2 = 5'(s2);
    for (int k = 0; k < n; k++) begin
      pim_cmd_t e;
      e = '0;
      e.typ = (op == BOP_STORE) ? CMD_WR : (src == LOC_MEM) ? CMD_RD : CMD_COMP;
      e.all_banks = 1; e.row = b.row; e.col = off(c1, k, s1); e.col2 = off(c2, k, s2);
      e.route = RT_BPU; e.bop = op; e.src = b.src; e.dst = b.dst; e.perm = b.perm;
      exp_q.push_back(e);
    end
    send(b);
  endtask

  initial begin
    bgpu_inst_t g;
    move_inst_t m;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // the paper's example: steps 1 and 2 from (0,0), back-to-back rate
    bpu_case(BOP_ADD, LOC_MEM, 0, 0, 4, 1, 2);
    wait_idle();
    checks += 2;
    if (n_seen != 4) begin failures++; $display("FAIL count %0d", n_seen); end
    if (last_cyc - first_cyc != 3) begin failures++; $display("FAIL rate %0d", last_cyc - first_cyc); end
    // negative steps, wrap-around, register source, store, nCMD = 64 and 0
    bpu_case(BOP_SORT, LOC_ROWA, 3, 60, 5, -1, 3);
    bpu_case(BOP_STORE, LOC_ROWB, 62, 1, 3, 1, 0);
    bpu_case(BOP_CMP_LT, LOC_MEM, 0, 0, 64, 1, 0);
    bpu_case(BOP_NOP, LOC_MEM, 0, 0, 0, 1, 0);
    wait_idle();
    // random BPU instructions with random back-pressure
    fork
      begin
        for (int it = 0; it < 60; it++)
          bpu_case(bpu_op_e'($urandom_range(0, 10)), $urandom_range(0, 5), $urandom_range(0, 63),
                   $urandom_range(0, 63), $urandom_range(0, 9), $urandom_range(0, 31) - 16,
                   $urandom_range(0, 31) - 16);
        wait_idle();
      end
      begin
        for (int c = 0; c < 800; c++) begin @(negedge clk); cmd_ready = ($urandom_range(0, 3) != 0); end
        cmd_ready = 1;
      end
    join
    wait_idle();
    // data movement: memory to chip buffer, and BGPU to memory
    for (int dir = 0; dir < 2; dir++) begin
      m = '0; m.id = 6'd5; m.cat = CAT_MOVE; m.op = MOP_MOVE; m.bank = 2'(dir + 1); m.row = 14'd77;
      m.col = 6'd10; m.regidx = 6'd3; m.src = dir ? MLOC_BGPU : MLOC_MEM;
      m.dst = dir ? MLOC_MEM : MLOC_CHIPBUF; m.pidx = 8'hA5; m.ncmd = 7'd6; m.step1 = 5'd2;
      for (int k = 0; k < 6; k++) begin
        pim_cmd_t e;
        e = '0; e.typ = dir ? CMD_WR : CMD_RD; e.bank = m.bank; e.row = 14'd77; e.col = off(10, k, 2);
        e.route = dir ? RT_VEC : RT_CHIPBUF; e.bop = BOP_NOP; e.idx = 6'(3 + k);
        e.src = m.src; e.dst = m.dst; e.aux = 8'hA5;
        exp_q.push_back(e);
      end
      send(m);
      wait_idle();
    end
    // activate: one row-open command
    m = '0; m.cat = CAT_MOVE; m.op = MOP_ACT; m.bank = 2'd3; m.row = 14'd999;
    begin
      pim_cmd_t e;
      e = '0; e.typ = CMD_ACT; e.bank = 2'd3; e.row = 14'd999; e.route = RT_NONE; e.bop = BOP_NOP;
      exp_q.push_back(e);
    end
    send(m);
    wait_idle();
    // BGPU setup: handed out whole on cfg, no commands
    g = '0; g.cat = CAT_BGPU; g.op = GOP_SETUP_OUT; g.bank = 2'd2; g.row = 14'd12; g.col = 6'd8; g.imm = 32'hDEAD_BEEF;
    @(negedge clk); inst = g; inst_valid = 1;
    @(negedge clk); inst_valid = 0;
    checks += 2;
    if (!cfg_valid) begin failures++; $display("FAIL cfg_valid"); end
    if (cfg != g) begin failures++; $display("FAIL cfg"); end
    @(negedge clk);
    checks++; if (cfg_valid) begin failures++; $display("FAIL cfg_valid held"); end
    repeat (5) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL leftover %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_bg_controller: sends a mix of instructions for this bank group and for
// other groups, pops the command queue at random, injects generator commands,
// and checks that only this group's instructions are decoded, in order, with
// the right column sequences; that generator commands are queued; that a BGPU
// setup instruction is released only once all earlier commands have left and
// the pipeline is idle; and that inst_space keeps the buffer from overflowing.
module tb_bg_controller;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0, inst_valid = 0, inst_space, pipe_idle = 1, bgpu_busy = 0;
  logic cfg_valid, gen_valid = 0, gen_ready, head_valid, issuable = 0, idle;
  logic [ID_W-1:0] bg_id = 6'd9;
  logic [63:0] inst = '0;
  bgpu_inst_t cfg;
  pim_cmd_t gen_cmd = '0, head;
  int checks = 0, failures = 0;
  pim_cmd_t exp_q[$];
  int n_pops = 0, cfg_after = 0, n_gen_seen = 0, n_gen_sent = 0, cyc = 0, last_pop = 0, n_cfg = 0;
  bit chaos = 1;

  bg_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) issuable = chaos ? ($urandom_range(0, 2) == 0) : 1'b1;

  // the pipeline is busy for RL cycles after each pop
  always @(posedge clk) begin
    cyc++;
    if (rst_n && head_valid && issuable) begin
      last_pop = cyc;
      if (head.aux == 8'hCC && head.route == RT_PROJ) n_gen_seen++;
      else begin
        checks++;
        if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected command"); end
        else begin
          if (head.col != exp_q[0].col || head.row != exp_q[0].row || head.typ != exp_q[0].typ) begin
            failures++; $display("FAIL command col %0d row %0d exp col %0d row %0d", head.col, head.row, exp_q[0].col, exp_q[0].row);
          end
          void'(exp_q.pop_front());
          n_pops++;
        end
      end
    end
    if (rst_n && cfg_valid) begin
      n_cfg++;
      checks += 2;
      if (n_pops != cfg_after || !pipe_idle) begin failures++; $display("FAIL cfg before earlier commands left"); end
      if (cfg.imm != 32'h1234_5678) begin failures++; $display("FAIL cfg content"); end
    end
  end
  always_comb pipe_idle = (cyc - last_pop) > RL;


  task automatic send(logic [63:0] w);
    @(negedge clk);
    while (!inst_space) @(negedge clk);
    inst = w; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
  endtask

  task automatic send_bpu(logic [5:0] id, int n);
    bpu_inst_t b;
    b = '0; b.id = id; b.cat = CAT_BPU; b.op = BOP_ADD; b.row = 14'($urandom); b.col1 = 6'($urandom);
    b.src = LOC_MEM; b.dst = LOC_ROWA; b.ncmd = 7'(n); b.step1 = 5'd1;
    if (id == bg_id)
      for (int k = 0; k < n; k++) begin
        pim_cmd_t e;
        e = '0; e.typ = CMD_RD; e.row = b.row; e.col = 6'(b.col1 + k);
        exp_q.push_back(e);
      end
    send(b);
  endtask

  initial begin
    bgpu_inst_t g;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fork
      begin
        for (int it = 0; it < 150; it++)
          send_bpu(($urandom_range(0, 2) == 0) ? 6'd9 : 6'($urandom_range(0, 15)), $urandom_range(1, 12));
      end
      begin
        // generator commands interleaved with decoded ones
        repeat (50) @(negedge clk);
        for (int i = 0; i < 40; i++) begin
          @(negedge clk);
          gen_cmd = '0; gen_cmd.typ = CMD_WR; gen_cmd.route = RT_PROJ; gen_cmd.aux = 8'hCC;
          gen_valid = 1;
          while (!gen_ready) @(negedge clk);
          @(negedge clk);
          gen_valid = 0;
          n_gen_sent++;
        end
      end
    join
    // a BGPU setup behind a long BPU instruction
    send_bpu(6'd9, 30);
    g = '0; g.id = 6'd9; g.cat = CAT_BGPU; g.op = GOP_SETUP_NUM; g.imm = 32'h1234_5678;
    cfg_after = n_pops + exp_q.size();
    send(g);
    send_bpu(6'd9, 3);
    while (!idle || exp_q.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    // busy BGPU holds decoding back
    bgpu_busy = 1;
    send_bpu(6'd9, 4);
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 4) begin failures++; $display("FAIL decoded while BGPU busy"); end
    bgpu_busy = 0;
    while (exp_q.size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    checks += 3;
    if (n_cfg != 1) begin failures++; $display("FAIL cfg count %0d", n_cfg); end
    if (n_gen_seen != n_gen_sent || n_gen_sent != 40) begin failures++; $display("FAIL gen %0d/%0d", n_gen_seen, n_gen_sent); end
    if (!idle) begin failures++; $display("FAIL not idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_bgpu: one bank group processing unit with a behavioural bank group
// around it. Commands the unit generates are accepted (with random
// back-pressure), delayed by the read latency and answered from a sparse
// memory of four banks, as the scheduler and banks would. Runs a project with
// a bitmask, a project with an OID list and a join, and checks the written
// output against results computed here, the completion flags, the tuple or
// pair count, the bank interleaving of the output and a cycle bound.
module tb_bgpu;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0, cfg_valid = 0, cmd_valid = 0, gen_valid, gen_ready = 1, busy;
  logic project_done, join_done;
  bgpu_inst_t cfg = '0;
  pim_cmd_t cmd = '0, gen_cmd;
  word_t rdata = '0, wdata;
  logic [15:0] out_count;
  int checks = 0, failures = 0;

  bgpu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sparse memory: key {bank, row, col}
  word_t mem [logic [21:0]];
  function automatic word_t rdmem(logic [1:0] b, logic [13:0] r, logic [5:0] c);
    return mem.exists({b, r, c}) ? mem[{b, r, c}] : '0;
  endfunction

  // read-latency pipe
  logic     pv [RL];
  pim_cmd_t pc [RL];
  logic     ext_v = 0;
  pim_cmd_t ext_c = '0;
  word_t    ext_d = '0;
  int n_wr_bank [4];
  initial for (int i = 0; i < RL; i++) begin pv[i] = 0; pc[i] = '0; end

  always @(posedge clk) begin
    if (pv[RL-1] && pc[RL-1].typ == CMD_WR) begin
      mem[{pc[RL-1].bank, pc[RL-1].row, pc[RL-1].col}] = wdata;
      n_wr_bank[pc[RL-1].bank]++;
    end
    for (int i = RL-1; i > 0; i--) begin pv[i] <= pv[i-1]; pc[i] <= pc[i-1]; end
    pv[0] <= rst_n && gen_valid && gen_ready;
    pc[0] <= gen_cmd;
  end
  always_comb begin
    cmd_valid = ext_v || pv[RL-1];
    cmd       = ext_v ? ext_c : pc[RL-1];
    rdata     = ext_v ? ext_d : rdmem(pc[RL-1].bank, pc[RL-1].row, pc[RL-1].col);
  end

  bit stress = 0;
  always @(negedge clk) gen_ready = stress ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic send_cfg(bgpu_op_e op, logic [1:0] b, logic [13:0] r, logic [5:0] c, logic [31:0] imm);
    @(negedge clk);
    cfg = '0; cfg.cat = CAT_BGPU; cfg.op = op; cfg.bank = b; cfg.row = r; cfg.col = c; cfg.imm = imm;
    cfg_valid = 1;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  // register move from the test bench side (as a MOVE instruction would)
  task automatic load_vec(int idx, word_t d);
    @(negedge clk);
    ext_c = '0; ext_c.typ = CMD_RD; ext_c.route = RT_VEC; ext_c.idx = 6'(idx); ext_d = d; ext_v = 1;
    @(negedge clk);
    ext_v = 0;
  endtask

  task automatic run(bit jn, bit oidl, output int cycles);
    send_cfg(GOP_START, 0, 0, 0, {30'd0, oidl, jn});
    cycles = 0;
    @(negedge clk);
    while (!(jn ? join_done : project_done)) begin @(negedge clk); cycles++; end
  endtask

  // check n expected 4-byte values laid out from the output address
  task automatic check_out(elem_t ex[$], logic [1:0] ob, logic [13:0] orow, logic [5:0] ocol);
    int entries;
    entries = (ex.size() + 7) / 8;
    for (int k = 0; k < entries; k++) begin
      elem_t [7:0] w;
      logic [19:0] a;
      a = {orow, ocol} + 20'(k / 4);
      w = rdmem(2'(ob + k), a[19:6], a[5:0]);
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (8*k + l < ex.size()) begin
          if (w[l] != ex[8*k+l]) begin failures++; $display("FAIL out %0d got %0d ex %0d", 8*k+l, w[l], ex[8*k+l]); end
        end else if (w[l] != 0) begin failures++; $display("FAIL pad %0d", 8*k+l); end
      end
    end
  endtask

  initial begin
    int cycles;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      logic [511:0] bmask;
      elem_t ex[$];
      elem_t [7:0] w;
      int n, density;
      ex.delete();
      stress = (rep >= 3);
      mem.delete();
      // ---------------- project with a bitmask
      n = (rep == 0) ? 512 : $urandom_range(1, 512);
      density = (rep == 0) ? 100 : $urandom_range(0, 100);
      for (int c = 0; c < 64; c++) begin
        for (int l = 0; l < 8; l++) w[l] = 32'(c * 8 + l + 7000 * rep);
        mem[{2'd1, 14'd3, 6'(c)}] = w;
      end
      for (int t = 0; t < 512; t++) begin
        bmask[t] = ($urandom_range(0, 99) < density);
        if (bmask[t] && t < n) ex.push_back(32'(t + 7000 * rep));
      end
      load_vec(0, bmask[255:0]);
      load_vec(1, bmask[511:256]);
      send_cfg(GOP_SETUP_IN, 2'd1, 14'd3, 6'd0, 32'd0);
      send_cfg(GOP_SETUP_OUT, 2'd2, 14'd9, 6'd60, 32'd0);
      send_cfg(GOP_SETUP_NUM, 2'd0, 14'd0, 6'd0, 32'(n));
      for (int b = 0; b < 4; b++) n_wr_bank[b] = 0;
      run(0, 0, cycles);
      check_out(ex, 2'd2, 14'd9, 6'd60);
      checks++;
      if (out_count != 16'(ex.size())) begin failures++; $display("FAIL project count %0d vs %0d", out_count, ex.size()); end
      if (rep == 0) begin
        // 64 reads and 64 writes spread evenly over the four banks
        checks += 2;
        if (cycles > 4 * 128) begin failures++; $display("FAIL project rate %0d cycles", cycles); end
        if (n_wr_bank[0] != 16 || n_wr_bank[3] != 16) begin failures++; $display("FAIL interleave"); end
        $display("project of 512 tuples: %0d cycles", cycles);
      end
      // ---------------- project with an OID list
      begin
        elem_t [31:0] ol;
        int no, o;
        ex.delete();
        no = $urandom_range(1, 32);
        o = 4000 + $urandom_range(0, 5);
        for (int i = 0; i < 32; i++) begin
          ol[i] = (i < no) ? 32'(o) : 32'd0;
          if (i < no) ex.push_back(32'(o - 4000 + 7000 * rep));
          o += $urandom_range(1, 15);
        end
        for (int s = 0; s < 4; s++) load_vec(s, ol[8*s +: 8]);
        send_cfg(GOP_SETUP_IN, 2'd1, 14'd3, 6'd0, 32'd4000);
        send_cfg(GOP_SETUP_OUT, 2'd0, 14'd20, 6'd0, 32'd0);
        send_cfg(GOP_SETUP_NUM, 2'd0, 14'd0, 6'd0, 32'(no));
        run(0, 1, cycles);
        check_out(ex, 2'd0, 14'd20, 6'd0);
        checks++;
        if (out_count != 16'(no)) begin failures++; $display("FAIL oid project count"); end
      end
      // ---------------- join
      begin
        elem_t [31:0] kr, ks, orr, os;
        int nr, ns, v;
        ex.delete();
        nr = $urandom_range(1, 32); ns = $urandom_range(1, 32);
        v = 0;
        for (int i = 0; i < 32; i++) begin v += $urandom_range(1, 3); kr[i] = v; orr[i] = 32'(100 + i); end
        v = 0;
        for (int j = 0; j < 32; j++) begin v += $urandom_range(0, 3); ks[j] = v; os[j] = 32'(200 + j); end
        for (int j = 0; j < ns; j++)
          for (int i = 0; i < nr; i++)
            if (kr[i] == ks[j]) begin ex.push_back(orr[i]); ex.push_back(os[j]); end
        for (int s = 0; s < 4; s++) begin
          mem[{2'd3, 14'd1, 6'(8 + s)}]  = kr[8*s +: 8];
          mem[{2'd3, 14'd1, 6'(12 + s)}] = orr[8*s +: 8];
          mem[{2'd1, 14'd2, 6'(62 + s)}] = ks[8*s +: 8];
        end
        // S straddles a row boundary: columns 62, 63 of row 2 then row 3
        for (int s = 0; s < 4; s++) begin
          logic [19:0] a;
          a = {14'd2, 6'd62} + 20'(s);
          mem[{2'd1, a}] = ks[8*s +: 8];
          a = {14'd2, 6'd62} + 20'(4 + s);
          mem[{2'd1, a}] = os[8*s +: 8];
        end
        send_cfg(GOP_SETUP_IN, 2'd3, 14'd1, 6'd8, 32'd0);
        send_cfg(GOP_SETUP_NUM, 2'd1, 14'd2, 6'd62, {10'd0, 6'(ns), 10'd0, 6'(nr)});
        send_cfg(GOP_SETUP_OUT, 2'd2, 14'd30, 6'd0, 32'd0);
        run(1, 0, cycles);
        check_out(ex, 2'd2, 14'd30, 6'd0);
        checks++;
        if (out_count != 16'(ex.size() / 2)) begin failures++; $display("FAIL join count %0d vs %0d", out_count, ex.size() / 2); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_bpu: drives PIM commands straight into one bank processing unit and
// checks the arithmetic, compare (bitmask), load/store and a complete
// 16-element bitonic sort against values computed here. The OIDs loaded
// beside the keys must follow the keys through the sort.
module tb_bpu;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  pim_cmd_t cmd;
  word_t rdata = '0, wdata;
  int checks = 0, failures = 0;
  word_t rb_model [4];
  logic [511:0] bm_model;

  bpu dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(bpu_op_e op, logic [2:0] src, logic [2:0] dst, logic [5:0] c1, logic [5:0] c2,
                       logic [2:0] perm, word_t rd, route_e rt = RT_BPU);
    @(negedge clk);
    cmd = '0;
    cmd.typ = (src == LOC_MEM) ? CMD_RD : CMD_COMP;
    cmd.all_banks = 1'b1;
    cmd.route = rt; cmd.bop = op; cmd.src = src; cmd.dst = dst;
    cmd.col = c1; cmd.col2 = c2; cmd.perm = perm;
    rdata = rd; cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0; rdata = '0;
  endtask

  // STORE reads out a register slot on wdata in the cycle it is issued
  task automatic peek(logic [2:0] src, logic [5:0] c2, output word_t w);
    @(negedge clk);
    cmd = '0; cmd.typ = CMD_WR; cmd.route = RT_BPU; cmd.bop = BOP_STORE;
    cmd.src = src; cmd.col2 = c2; cmd_valid = 1'b1;
    #1 w = wdata;
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  function automatic word_t rnd_word();
    word_t w;
    for (int k = 0; k < 8; k++) w[32*k +: 32] = $urandom_range(0, 2000) - 1000;
    return w;
  endfunction

  initial begin
    word_t w, a, e;
    elem_t [7:0] av, bv, ev;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load row register B slots from memory
    for (int s = 0; s < 4; s++) begin
      rb_model[s] = rnd_word();
      issue(BOP_LOAD, LOC_MEM, LOC_ROWB, 6'(s), 6'(s), 3'd7, rb_model[s]);
    end
    for (int s = 0; s < 4; s++) begin
      peek(LOC_ROWB, 6'(s), w);
      checks++; if (w != rb_model[s]) begin failures++; $display("FAIL load/store slot %0d", s); end
    end
    // a command routed elsewhere must not touch the unit
    issue(BOP_LOAD, LOC_MEM, LOC_ROWB, 0, 0, 3'd7, '1, RT_VEC);
    peek(LOC_ROWB, 0, w);
    checks++; if (w != rb_model[0]) begin failures++; $display("FAIL route gating"); end
    // arithmetic: memory operand against row register B, result to row A
    for (int it = 0; it < 200; it++) begin
      bpu_op_e op;
      int s;
      s = $urandom_range(0, 3);
      op = bpu_op_e'($urandom_range(0, 4));
      a = rnd_word(); av = a; bv = rb_model[s];
      for (int k = 0; k < 8; k++) begin
        case (op)
          BOP_ADD: ev[k] = av[k] + bv[k];
          BOP_SUB: ev[k] = av[k] - bv[k];
          BOP_MUL: ev[k] = av[k] * bv[k];
          BOP_MIN: ev[k] = ($signed(av[k]) < $signed(bv[k])) ? av[k] : bv[k];
          default: ev[k] = ($signed(av[k]) > $signed(bv[k])) ? av[k] : bv[k];
        endcase
      end
      issue(op, LOC_MEM, LOC_ROWA, 6'($urandom_range(0, 63)), 6'(s), 3'd7, a);
      peek(LOC_ROWA, 6'(s), w);
      checks++; if (w != word_t'(ev)) begin failures++; $display("FAIL op %s", op.name()); end
    end
    // select: 64 compares fill the 512-bit bitmask
    bm_model = '0;
    for (int c = 0; c < 64; c++) begin
      bpu_op_e op;
      int s;
      s = $urandom_range(0, 3);
      op = bpu_op_e'($urandom_range(6, 8));
      a = rnd_word(); av = a; bv = rb_model[s];
      if (c % 7 == 0) av[3] = bv[3];
      a = av;
      for (int k = 0; k < 8; k++)
        bm_model[8*c+k] = (op == BOP_CMP_LT) ? ($signed(av[k]) < $signed(bv[k])) :
                          (op == BOP_CMP_GT) ? ($signed(av[k]) > $signed(bv[k])) : (av[k] == bv[k]);
      issue(op, LOC_MEM, LOC_BITMASK, 6'(c), 6'(s), 3'd7, a);
    end
    peek(LOC_BITMASK, 0, w);
    checks++; if (w != bm_model[255:0]) begin failures++; $display("FAIL bitmask low"); end
    peek(LOC_BITMASK, 1, w);
    checks++; if (w != bm_model[511:256]) begin failures++; $display("FAIL bitmask high"); end
    // bitonic sort of 16 keys held in row A slot 1 and row B slot 2
    for (int rep = 0; rep < 20; rep++) begin
      elem_t [15:0] keys, oids, outk, outo;
      int seq[10] = '{0, 1, 0, 3, 2, 0, 5, 4, 2, 0};
      for (int i = 0; i < 16; i++) begin
        keys[i] = (rep == 0) ? 32'(15 - i) : 32'(i * 37 + $urandom_range(0, 36) - 300);
        oids[i] = 32'(1000 + i);
      end
      issue(BOP_LOAD, LOC_MEM, LOC_ROWA, 6'd1, 6'd1, 3'd7, keys[7:0]);
      issue(BOP_LOAD, LOC_MEM, LOC_ROWB, 6'd2, 6'd2, 3'd7, keys[15:8]);
      issue(BOP_LOAD, LOC_MEM, LOC_OIDA, 6'd1, 6'd1, 3'd7, oids[7:0]);
      issue(BOP_LOAD, LOC_MEM, LOC_OIDB, 6'd2, 6'd2, 3'd7, oids[15:8]);
      for (int st = 0; st < 10; st++)
        issue(BOP_SORT, LOC_ROWA, LOC_ROWA, 6'd1, 6'd2, 3'(seq[st]), '0);
      peek(LOC_ROWA, 6'd1, w); outk[7:0] = w;
      peek(LOC_ROWB, 6'd2, w); outk[15:8] = w;
      peek(LOC_OIDA, 6'd1, w); outo[7:0] = w;
      peek(LOC_OIDB, 6'd2, w); outo[15:8] = w;
      for (int i = 0; i < 16; i++) begin
        checks += 2;
        if (i > 0 && $signed(outk[i]) < $signed(outk[i-1])) begin failures++; $display("FAIL sort order %0d", i); end
        if (outo[i] < 1000 || outo[i] > 1015 || keys[outo[i] - 1000] != outk[i]) begin
          failures++; $display("FAIL oid follow %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

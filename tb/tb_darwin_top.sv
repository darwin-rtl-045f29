// tb_darwin_top: end-to-end test of one Darwin rank at its full size (four
// dies, sixteen bank groups, sixty-four banks, every parameter at its
// default). The host side encodes PIM instructions into concatenated
// instruction writes on the 64-bit data pins, waits for 'ready' between
// writes, and checks the bank contents against results computed here:
//  * select and aggregate (sum, minimum) on all sixteen banks of die 0 at
//    once, over two rows so that rows conflict;
//  * a sixteen-element bitonic sort per bank in die 1, group 0, with the
//    OIDs following the keys;
//  * project with a bitmask (die 1, group 1) and with an OID list (die 2,
//    group 2), join (die 3, group 3), all run by the bank-group units;
//  * a move between two bank groups through the chip buffer (die 2);
//  * a move between two dies through the rank buffer (die 0 to die 3) and a
//    64-byte read of the rank buffer by the host through the DQ aligner.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_darwin_top;
  import darwin_pkg::*;
  localparam int NB = 64;
  logic clk = 0, rst_n = 1, dq_valid = 0, ready, host_rd_req = 0, host_rd_valid;
  logic [63:0] dq = '0, host_rd_beat;
  logic [5:0] host_rd_idx = '0;
  dram_cmd_t bank_cmd [NB];
  word_t bank_wdata [NB], bank_rdata [NB];
  logic [15:0] project_done, join_done;
  logic [15:0] out_count [16];
  int checks = 0, failures = 0;

  darwin_top dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- bank arrays, with a back door
  logic  bd_we [NB];
  int    bd_row = 0, bd_col = 0;
  word_t bd_wdata = '0, bd_rdata [NB];
  int    n_pre_bank [NB], n_err_bank [NB];
  initial for (int i = 0; i < NB; i++) bd_we[i] = 1'b0;
  for (genvar i = 0; i < NB; i++) begin : g_bank
    dram_bank_model u_bank (.clk(clk), .cmd(bank_cmd[i]), .wdata(bank_wdata[i]), .rdata(bank_rdata[i]),
                            .bd_we(bd_we[i]), .bd_row(bd_row), .bd_col(bd_col), .bd_wdata(bd_wdata),
                            .bd_rdata(bd_rdata[i]));
    always_comb begin n_pre_bank[i] = u_bank.n_pre; n_err_bank[i] = u_bank.errors; end
  end
  task automatic poke(int i, int r, int c, word_t w);
    bd_row = r; bd_col = c; bd_wdata = w; bd_we[i] = 1'b1;
    #1 bd_we[i] = 1'b0;
    #1;
  endtask
  task automatic peek(int i, int r, int c, output word_t w);
    bd_row = r; bd_col = c;
    #1 w = bd_rdata[i];
  endtask
  // bank number of die d, group g, bank b
  function automatic int bk(int d, int g, int b);
    return (d * 4 + g) * 4 + b;
  endfunction

  // ---------------- mechanism counters
  typedef enum int {
    M_SELECT, M_SUM, M_MIN, M_SORT, M_PROJ_BITMASK, M_PROJ_OID, M_JOIN, M_CHIPBUF, M_RANKBUF,
    M_HOST_READ, M_ROW_CONFLICT, M_ACT_WINDOW_STALL, M_READY_STALL, M_CIMT, M_NUM
  } mech_e;
  int mech [M_NUM];
  initial for (int m = 0; m < M_NUM; m++) mech[m] = 0;

  // activates held back by tRRD / tFAW in any die
  always @(posedge clk) if (rst_n) begin
    if ((|dut.g_chip[0].u_chip.u_sched.want_act && !dut.g_chip[0].u_chip.u_sched.chip_act_ok) ||
        (|dut.g_chip[1].u_chip.u_sched.want_act && !dut.g_chip[1].u_chip.u_sched.chip_act_ok) ||
        (|dut.g_chip[2].u_chip.u_sched.want_act && !dut.g_chip[2].u_chip.u_sched.chip_act_ok) ||
        (|dut.g_chip[3].u_chip.u_sched.want_act && !dut.g_chip[3].u_chip.u_sched.chip_act_ok))
      mech[M_ACT_WINDOW_STALL]++;
  end

  // ---------------- instruction builders
  function automatic logic [63:0] i_bpu(int id, bpu_op_e op, int row, int c1, int c2, int src, int dst,
                                        int perm, int n, int s1, int s2);
    bpu_inst_t b;
    b = '0; b.id = 6'(id); b.cat = CAT_BPU; b.op = op; b.row = 14'(row); b.col1 = 6'(c1); b.col2 = 6'(c2);
    b.src = 3'(src); b.dst = 3'(dst); b.perm = 3'(perm); b.ncmd = 7'(n); b.step1 = 5'(s1); b.step2 = 5'(s2);
    return b;
  endfunction
  function automatic logic [63:0] i_mv(int id, int bank, int row, int col, int ridx, int src, int dst,
                                       int pidx, int n);
    move_inst_t m;
    m = '0; m.id = 6'(id); m.cat = CAT_MOVE; m.op = MOP_MOVE; m.bank = 2'(bank); m.row = 14'(row);
    m.col = 6'(col); m.regidx = 6'(ridx); m.src = 3'(src); m.dst = 3'(dst); m.pidx = 8'(pidx);
    m.ncmd = 7'(n); m.step1 = 5'd1;
    return m;
  endfunction
  function automatic logic [63:0] i_bg(int id, bgpu_op_e op, int bank, int row, int col, logic [31:0] imm);
    bgpu_inst_t g;
    g = '0; g.id = 6'(id); g.cat = CAT_BGPU; g.op = op; g.bank = 2'(bank); g.row = 14'(row); g.col = 6'(col);
    g.imm = imm;
    return g;
  endfunction
  function automatic logic [63:0] i_nop();
    move_inst_t m;
    m = '0; m.id = 6'h3f; m.cat = CAT_MOVE; m.op = MOP_NOP;
    return m;
  endfunction

  // ---------------- host: concatenated instruction writes
  logic [63:0] pend [4][$];
  task automatic put(logic [63:0] w);
    pend[int'(w[63:58]) / 4].push_back(w);
  endtask

  task automatic send_all();
    while (pend[0].size() + pend[1].size() + pend[2].size() + pend[3].size() != 0) begin
      logic [63:0] ins [8];
      for (int i = 0; i < 8; i++) ins[i] = (pend[i % 4].size() != 0) ? pend[i % 4].pop_front() : i_nop();
      @(negedge clk);
      while (!ready) begin mech[M_READY_STALL]++; @(negedge clk); end
      // slice 4b+l of the write sits in lane l of beat b; instruction i is
      // carried by lane i%4 of beats 4(i/4)..4(i/4)+3, high slice first
      for (int b = 0; b < 8; b++) begin
        for (int l = 0; l < 4; l++) dq[16*l +: 16] = ins[4*(b/4) + l][16*(3 - b%4) +: 16];
        dq_valid = 1;
        @(negedge clk);
      end
      dq_valid = 0;
      mech[M_CIMT]++;
      repeat (2) @(negedge clk);
    end
  endtask

  // wait until no bank has seen a command for a while
  task automatic quiesce();
    int quiet;
    quiet = 0;
    while (quiet < 40) begin
      bit any;
      @(negedge clk);
      any = 0;
      for (int i = 0; i < NB; i++) if (bank_cmd[i].typ != CMD_NOP) any = 1;
      quiet = any ? 0 : quiet + 1;
    end
  endtask

  function automatic void chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endfunction

  // ---------------- test data and expected results
  elem_t v [16][2][8][8];        // die-0 bank, row, column, lane
  elem_t sk [4][16], so [4][16]; // sort keys / OIDs per bank of die 1 group 0
  logic [511:0] pbm;             // project bitmask
  elem_t pex[$], oex[$], jex[$];
  elem_t [31:0] oidl;
  int n_oid;

  initial begin
    elem_t [7:0] w, e;
    word_t t1, t2;
    int seq [10] = '{0, 1, 0, 3, 2, 0, 5, 4, 2, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ---- data
    for (int b = 0; b < 16; b++)
      for (int r = 0; r < 2; r++) begin
        for (int c = 0; c < 8; c++) begin
          for (int k = 0; k < 8; k++) begin v[b][r][c][k] = $urandom_range(0, 999); w[k] = v[b][r][c][k]; end
          poke(b, r, c, w);
        end
        for (int k = 0; k < 8; k++) w[k] = 32'd500;
        poke(b, r, 8, w);
      end
    for (int b = 0; b < 4; b++) begin
      for (int i = 0; i < 16; i++) begin sk[b][i] = $urandom_range(0, 5000) - 2500; so[b][i] = 32'(b * 100 + i); end
      for (int h = 0; h < 2; h++) begin
        for (int k = 0; k < 8; k++) w[k] = sk[b][8*h + k];
        poke(bk(1, 0, b), 0, h, w);
        for (int k = 0; k < 8; k++) w[k] = so[b][8*h + k];
        poke(bk(1, 0, b), 0, 2 + h, w);
      end
    end
    // project with a bitmask: 512 tuples in die 1 group 1 bank 2 row 1, bitmask in bank 0 row 0
    for (int c = 0; c < 64; c++) begin
      for (int k = 0; k < 8; k++) w[k] = 32'(20000 + 8*c + k);
      poke(bk(1, 1, 2), 1, c, w);
    end
    for (int t = 0; t < 512; t++) begin
      pbm[t] = ($urandom_range(0, 2) == 0);
      if (pbm[t]) pex.push_back(32'(20000 + t));
    end
    poke(bk(1, 1, 0), 0, 0, pbm[255:0]);
    poke(bk(1, 1, 0), 0, 1, pbm[511:256]);
    // project with an OID list: die 2 group 2, tuples in bank 1 row 1, OIDs in bank 3 row 0
    begin
      int o;
      n_oid = 32; o = 7000 + $urandom_range(0, 7);
      for (int i = 0; i < 32; i++) begin oidl[i] = o; oex.push_back(32'(30000 + o - 7000)); o += $urandom_range(1, 15); end
      for (int c = 0; c < 64; c++) begin
        for (int k = 0; k < 8; k++) w[k] = 32'(30000 + 8*c + k);
        poke(bk(2, 2, 1), 1, c, w);
      end
      for (int s = 0; s < 4; s++) poke(bk(2, 2, 3), 0, s, oidl[8*s +: 8]);
    end
    // join: die 3 group 3; R (32 tuples) in bank 0 row 1 from column 0, S (32) in bank 1 row 1
    begin
      elem_t [31:0] kr, ks, orr, os;
      int x;
      x = 0;
      for (int i = 0; i < 32; i++) begin x += $urandom_range(1, 3); kr[i] = x; orr[i] = 32'(40000 + i); end
      x = 0;
      for (int j = 0; j < 32; j++) begin x += $urandom_range(0, 3); ks[j] = x; os[j] = 32'(50000 + j); end
      for (int j = 0; j < 32; j++)
        for (int i = 0; i < 32; i++)
          if (kr[i] == ks[j]) begin jex.push_back(orr[i]); jex.push_back(os[j]); end
      for (int s = 0; s < 4; s++) begin
        poke(bk(3, 3, 0), 1, s, kr[8*s +: 8]);
        poke(bk(3, 3, 0), 1, 4 + s, orr[8*s +: 8]);
        poke(bk(3, 3, 1), 1, s, ks[8*s +: 8]);
        poke(bk(3, 3, 1), 1, 4 + s, os[8*s +: 8]);
      end
    end

    // ---- phase 1: everything that runs in parallel
    for (int g = 0; g < 4; g++) begin
      // select on row 0 (threshold to row B slot 0), bitmask stored to column 30
      put(i_bpu(g, BOP_LOAD, 0, 8, 0, LOC_MEM, LOC_ROWB, 7, 1, 0, 0));
      put(i_bpu(g, BOP_CMP_LT, 0, 0, 0, LOC_MEM, LOC_BITMASK, 7, 8, 1, 0));
      put(i_bpu(g, BOP_STORE, 0, 30, 0, LOC_BITMASK, LOC_MEM, 7, 1, 0, 0));
      // sum on row 0 into row B slot 1, stored to column 31
      put(i_bpu(g, BOP_LOAD, 0, 0, 1, LOC_MEM, LOC_ROWB, 7, 1, 0, 0));
      put(i_bpu(g, BOP_ADD, 0, 1, 1, LOC_MEM, LOC_ROWB, 7, 7, 1, 0));
      put(i_bpu(g, BOP_STORE, 0, 31, 1, LOC_ROWB, LOC_MEM, 7, 1, 0, 0));
      // minimum on row 1, stored to row 1 column 31
      put(i_bpu(g, BOP_LOAD, 1, 0, 2, LOC_MEM, LOC_ROWB, 7, 1, 0, 0));
      put(i_bpu(g, BOP_MIN, 1, 1, 2, LOC_MEM, LOC_ROWB, 7, 7, 1, 0));
      put(i_bpu(g, BOP_STORE, 1, 31, 2, LOC_ROWB, LOC_MEM, 7, 1, 0, 0));
      // back to row 0
      put(i_bpu(g, BOP_STORE, 0, 32, 2, LOC_ROWB, LOC_MEM, 7, 1, 0, 0));
    end
    // sort in die 1 group 0 (thread 4)
    put(i_bpu(4, BOP_LOAD, 0, 0, 0, LOC_MEM, LOC_ROWA, 7, 1, 0, 0));
    put(i_bpu(4, BOP_LOAD, 0, 1, 0, LOC_MEM, LOC_ROWB, 7, 1, 0, 0));
    put(i_bpu(4, BOP_LOAD, 0, 2, 0, LOC_MEM, LOC_OIDA, 7, 1, 0, 0));
    put(i_bpu(4, BOP_LOAD, 0, 3, 0, LOC_MEM, LOC_OIDB, 7, 1, 0, 0));
    for (int s = 0; s < 10; s++) put(i_bpu(4, BOP_SORT, 0, 0, 0, LOC_ROWA, LOC_ROWA, seq[s], 1, 0, 0));
    put(i_bpu(4, BOP_STORE, 0, 10, 0, LOC_ROWA, LOC_MEM, 7, 1, 0, 0));
    put(i_bpu(4, BOP_STORE, 0, 11, 0, LOC_ROWB, LOC_MEM, 7, 1, 0, 0));
    put(i_bpu(4, BOP_STORE, 0, 12, 0, LOC_OIDA, LOC_MEM, 7, 1, 0, 0));
    put(i_bpu(4, BOP_STORE, 0, 13, 0, LOC_OIDB, LOC_MEM, 7, 1, 0, 0));
    // project with a bitmask (thread 5)
    put(i_mv(5, 0, 0, 0, 0, MLOC_MEM, MLOC_BGPU, 0, 2));
    put(i_bg(5, GOP_SETUP_IN, 2, 1, 0, 0));
    put(i_bg(5, GOP_SETUP_OUT, 0, 2, 0, 0));
    put(i_bg(5, GOP_SETUP_NUM, 0, 0, 0, 512));
    put(i_bg(5, GOP_START, 0, 0, 0, 0));
    // project with an OID list (thread 10)
    put(i_mv(10, 3, 0, 0, 0, MLOC_MEM, MLOC_BGPU, 0, 4));
    put(i_bg(10, GOP_SETUP_IN, 1, 1, 0, 7000));
    put(i_bg(10, GOP_SETUP_OUT, 0, 2, 0, 0));
    put(i_bg(10, GOP_SETUP_NUM, 0, 0, 0, n_oid));
    put(i_bg(10, GOP_START, 0, 0, 0, 2));
    // join (thread 15)
    put(i_bg(15, GOP_SETUP_IN, 0, 1, 0, 0));
    put(i_bg(15, GOP_SETUP_NUM, 1, 1, 0, {10'd0, 6'd32, 10'd0, 6'd32}));
    put(i_bg(15, GOP_SETUP_OUT, 2, 2, 0, 0));
    put(i_bg(15, GOP_START, 0, 0, 0, 1));
    // chip buffer: die 2 group 0 bank 1 row 0 columns 0..3 into buffer slots 4..7
    put(i_mv(8, 1, 0, 0, 4, MLOC_MEM, MLOC_CHIPBUF, 0, 4));
    // rank buffer: die 0 group 1 bank 0 row 0 columns 0..1 into rank buffer 8..9
    put(i_mv(1, 0, 0, 0, 8, MLOC_MEM, MLOC_RANKBUF, 0, 2));
    send_all();
    quiesce();
    while (!(project_done[5] && project_done[10] && join_done[15])) @(negedge clk);
    quiesce();

    // ---- phase 2: the second halves of the moves
    put(i_mv(11, 2, 3, 16, 4, MLOC_CHIPBUF, MLOC_MEM, 0, 4));               // die 2 group 3 bank 2 row 3
    put(i_mv(12, 2, 2, 20, 8, MLOC_RANKBUF, MLOC_MEM, 8'b00_01_10_11, 2));  // die 3 group 0 bank 2 row 2
    send_all();
    quiesce();

    // ---- checks: select and aggregates on die 0
    for (int b = 0; b < 16; b++) begin
      logic [255:0] bm;
      bm = '0;
      for (int c = 0; c < 8; c++) for (int k = 0; k < 8; k++) bm[8*c+k] = (v[b][0][c][k] < 500);
      peek(b, 0, 30, t1);
      chk(t1 == bm, $sformatf("select bank %0d", b));
      if (t1 == bm) mech[M_SELECT]++;
      for (int k = 0; k < 8; k++) begin e[k] = 0; for (int c = 0; c < 8; c++) e[k] += v[b][0][c][k]; end
      peek(b, 0, 31, t1);
      chk(t1 == e, $sformatf("sum bank %0d", b));
      if (t1 == e) mech[M_SUM]++;
      for (int k = 0; k < 8; k++) begin
        e[k] = 1000;
        for (int c = 0; c < 8; c++) if (v[b][1][c][k] < e[k]) e[k] = v[b][1][c][k];
      end
      peek(b, 1, 31, t1);
      peek(b, 0, 32, t2);
      chk(t1 == e && t2 == e, $sformatf("minimum bank %0d", b));
      if (t1 == e) mech[M_MIN]++;
      if (n_pre_bank[b] > 0) mech[M_ROW_CONFLICT]++;
    end
    // sort
    for (int b = 0; b < 4; b++) begin
      elem_t [15:0] ok, oo;
      logic [15:0] seen;
      bit good;
      peek(bk(1, 0, b), 0, 10, t1); ok[7:0] = t1;
      peek(bk(1, 0, b), 0, 11, t1); ok[15:8] = t1;
      peek(bk(1, 0, b), 0, 12, t1); oo[7:0] = t1;
      peek(bk(1, 0, b), 0, 13, t1); oo[15:8] = t1;
      // ascending keys, each OID once, each OID beside its own key
      good = 1;
      seen = '0;
      for (int i = 0; i < 16; i++) begin
        if (i > 0 && $signed(ok[i]) < $signed(ok[i-1])) good = 0;
        if (seen[oo[i][3:0]]) good = 0;
        seen[oo[i][3:0]] = 1'b1;
        if (oo[i] < 32'(b * 100) || oo[i] > 32'(b * 100 + 15) || sk[b][oo[i] - 32'(b * 100)] != ok[i]) good = 0;
      end
      chk(good, $sformatf("sort bank %0d", b));
      if (good) mech[M_SORT]++;
    end
    // project with a bitmask: output entry i in bank (i mod 4), row 2, column i/4
    begin
      bit good;
      good = (out_count[5] == 16'(pex.size()));
      for (int i = 0; i < (pex.size() + 7) / 8; i++) begin
        peek(bk(1, 1, i % 4), 2, i / 4, t1); w = t1;
        for (int k = 0; k < 8; k++) if (w[k] != ((8*i + k < pex.size()) ? pex[8*i + k] : 0)) good = 0;
      end
      chk(good, "project with bitmask");
      if (good) mech[M_PROJ_BITMASK]++;
    end
    begin
      bit good;
      good = (out_count[10] == 16'(oex.size()));
      for (int i = 0; i < 4; i++) begin
        peek(bk(2, 2, i % 4), 2, i / 4, t1); w = t1;
        for (int k = 0; k < 8; k++) if (w[k] != oex[8*i + k]) good = 0;
      end
      chk(good, "project with OID list");
      if (good) mech[M_PROJ_OID]++;
    end
    begin
      bit good;
      good = (out_count[15] == 16'(jex.size() / 2));
      for (int i = 0; i < (jex.size() + 7) / 8; i++) begin
        peek(bk(3, 3, (2 + i) % 4), 2, i / 4, t1); w = t1;
        for (int k = 0; k < 8; k++) if (w[k] != ((8*i + k < jex.size()) ? jex[8*i + k] : 0)) good = 0;
      end
      chk(good, $sformatf("join (%0d pairs)", jex.size() / 2));
      if (good) mech[M_JOIN]++;
    end
    // chip buffer
    begin
      bit good;
      good = 1;
      for (int c = 0; c < 4; c++) begin
        peek(bk(2, 0, 1), 0, c, t1);
        peek(bk(2, 3, 2), 3, 16 + c, t2);
        if (t1 != t2) good = 0;
      end
      chk(good, "chip buffer move");
      if (good) mech[M_CHIPBUF]++;
    end
    // rank buffer: die 0 to die 3 with the quarters reversed, then a host read
    begin
      bit good;
      logic [511:0] pair;
      int nb;
      good = 1;
      for (int c = 0; c < 2; c++) begin
        peek(bk(0, 1, 0), 0, c, t1);
        pair[256*c +: 256] = t1;
        peek(bk(3, 0, 2), 2, 20 + c, t2);
        if (t2 != {t1[63:0], t1[127:64], t1[191:128], t1[255:192]}) good = 0;
      end
      chk(good, "rank buffer move between dies");
      if (good) mech[M_RANKBUF]++;
      @(negedge clk); host_rd_idx = 6'd8; host_rd_req = 1;
      @(negedge clk); host_rd_req = 0;
      nb = 0; good = 1;
      for (int cy = 0; cy < 30; cy++) begin
        if (host_rd_valid) begin
          if (host_rd_beat != pair[64*nb +: 64]) good = 0;
          nb++;
        end
        @(negedge clk);
      end
      chk(good && nb == 8, "host read of the rank buffer");
      if (good && nb == 8) mech[M_HOST_READ]++;
    end
    for (int i = 0; i < NB; i++) chk(n_err_bank[i] == 0, $sformatf("bank protocol %0d", i));

    for (int m = 0; m < M_NUM; m++) begin
      mech_e me;
      me = mech_e'(m);
      $display("mechanism %-20s %0d", me.name(), mech[m]);
      chk(mech[m] > 0, $sformatf("mechanism %s never happened", me.name()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_darwin_chip: one Darwin die with sixteen behavioural bank arrays. The
// host side sends 64-bit PIM instructions whenever 'ready' allows and checks
// the bank contents afterwards against results computed here:
//  * select: BPU compares of eight columns against a threshold in row
//    register B, bitmask stored back to the bank (all four banks at once);
//  * aggregate: BPU load and add over eight columns, sum stored back; a
//    second aggregate (minimum) on another row forces row conflicts;
//  * project: bitmask moved into the BGPU, setup and start instructions, the
//    generator's output checked in the interleaved output banks;
//  * chip buffer: four words moved from bank group 0 to bank group 3;
//  * rank buffer port: words moved out of a bank appear on rb_wr_*, and
//    words moved in take the rank buffer's data.
module tb_darwin_chip;
  import darwin_pkg::*;
  localparam int NB = 16;
  logic clk = 0, rst_n = 1, inst_valid = 0, ready;
  initial #1 rst_n = 0;   // a reset edge before the first clock edge
  logic [5:0] id_base = 6'd0;
  logic [63:0] inst = '0;
  dram_cmd_t bank_cmd [NB];
  word_t bank_wdata [NB], bank_rdata [NB];
  logic rb_wr_en;
  logic [5:0] rb_wr_idx, rb_rd_idx;
  word_t rb_wr_data, rb_rd_data;
  logic [7:0] rb_rd_pidx;
  logic [3:0] project_done, join_done;
  logic [15:0] out_count [4];
  int checks = 0, failures = 0;

  darwin_chip dut (.*);
  always #5 clk = ~clk;

  // back door into the bank arrays
  logic  bd_we [NB];
  int    bd_row = 0, bd_col = 0;
  word_t bd_wdata = '0, bd_rdata [NB];
  initial for (int i = 0; i < NB; i++) bd_we[i] = 1'b0;
  task automatic poke(int i, int r, int c, word_t w);
    bd_row = r; bd_col = c; bd_wdata = w; bd_we[i] = 1'b1;
    #1 bd_we[i] = 1'b0;
    #1;
  endtask
  task automatic peek(int i, int r, int c, output word_t w);
    bd_row = r; bd_col = c;
    #1 w = bd_rdata[i];
  endtask
  int n_pre_bank [NB], n_err_bank [NB];

  for (genvar i = 0; i < NB; i++) begin : g_bank
    dram_bank_model u_bank (.clk(clk), .cmd(bank_cmd[i]), .wdata(bank_wdata[i]), .rdata(bank_rdata[i]),
                            .bd_we(bd_we[i]), .bd_row(bd_row), .bd_col(bd_col), .bd_wdata(bd_wdata),
                            .bd_rdata(bd_rdata[i]));
    always_comb begin n_pre_bank[i] = u_bank.n_pre; n_err_bank[i] = u_bank.errors; end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // rank-buffer side: a word per index, returned with the quarter permute
  word_t rb_seen [64];
  int n_rb_wr = 0;
  always @(posedge clk) if (rst_n && rb_wr_en) begin rb_seen[rb_wr_idx] = rb_wr_data; n_rb_wr++; end
  function automatic word_t rbword(logic [5:0] i);
    elem_t [7:0] w;
    for (int k = 0; k < 8; k++) w[k] = 32'(int'(i) * 100 + k);
    return w;
  endfunction
  always_comb begin
    word_t w;
    w = rbword(rb_rd_idx);
    for (int k = 0; k < 4; k++) rb_rd_data[64*k +: 64] = w[64*rb_rd_pidx[2*k +: 2] +: 64];
  end

  // ---- instruction builders
  function automatic logic [63:0] i_bpu(int id, bpu_op_e op, int row, int c1, int c2, int src, int dst,
                                        int n, int s1, int s2);
    bpu_inst_t b;
    b = '0; b.id = 6'(id); b.cat = CAT_BPU; b.op = op; b.row = 14'(row); b.col1 = 6'(c1); b.col2 = 6'(c2);
    b.src = 3'(src); b.dst = 3'(dst); b.perm = 3'd7; b.ncmd = 7'(n); b.step1 = 5'(s1); b.step2 = 5'(s2);
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

  int n_stall = 0;
  task automatic send(logic [63:0] w);
    @(negedge clk);
    while (!ready) begin n_stall++; @(negedge clk); end
    inst = w; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
  endtask

  task automatic settle(int n);
    repeat (n) @(negedge clk);
  endtask

  function automatic void chk(bit ok, string m);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", m); end
  endfunction

  elem_t v [4][2][8][8];   // bank, row, column, lane (group 0)
  initial begin
    elem_t [7:0] w, e;
    word_t t1, t2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- data for group 0: rows 0 and 1, columns 0..7; threshold at column 8
    for (int b = 0; b < 4; b++)
      for (int r = 0; r < 2; r++) begin
        for (int c = 0; c < 8; c++) begin
          for (int k = 0; k < 8; k++) begin v[b][r][c][k] = $urandom_range(0, 99); w[k] = v[b][r][c][k]; end
          poke(b, r, c, w);
        end
        for (int k = 0; k < 8; k++) w[k] = 32'd50;
        poke(b, r, 8, w);
      end
    // select on row 0: threshold to row B slot 0, compare, store bitmask to column 30
    send(i_bpu(0, BOP_LOAD, 0, 8, 0, LOC_MEM, LOC_ROWB, 1, 0, 0));
    send(i_bpu(0, BOP_CMP_LT, 0, 0, 0, LOC_MEM, LOC_BITMASK, 8, 1, 0));
    send(i_bpu(0, BOP_STORE, 0, 30, 0, LOC_BITMASK, LOC_MEM, 1, 0, 0));
    // aggregate (sum) on row 0 into row B slot 1, stored to column 31
    send(i_bpu(0, BOP_LOAD, 0, 0, 1, LOC_MEM, LOC_ROWB, 1, 0, 0));
    send(i_bpu(0, BOP_ADD, 0, 1, 1, LOC_MEM, LOC_ROWB, 7, 1, 0));
    send(i_bpu(0, BOP_STORE, 0, 31, 1, LOC_ROWB, LOC_MEM, 1, 0, 0));
    // aggregate (minimum) on row 1, stored to row 1 column 31, then row 0 again
    send(i_bpu(0, BOP_LOAD, 1, 0, 2, LOC_MEM, LOC_ROWB, 1, 0, 0));
    send(i_bpu(0, BOP_MIN, 1, 1, 2, LOC_MEM, LOC_ROWB, 7, 1, 0));
    send(i_bpu(0, BOP_STORE, 1, 31, 2, LOC_ROWB, LOC_MEM, 1, 0, 0));
    send(i_bpu(0, BOP_STORE, 0, 32, 2, LOC_ROWB, LOC_MEM, 1, 0, 0));
    settle(200);
    for (int b = 0; b < 4; b++) begin
      logic [255:0] bm;
      bm = '0;
      for (int c = 0; c < 8; c++) for (int k = 0; k < 8; k++) bm[8*c+k] = (v[b][0][c][k] < 50);
      peek(b, 0, 30, t1);
      chk(t1 == bm, $sformatf("select bitmask bank %0d", b));
      for (int k = 0; k < 8; k++) begin
        e[k] = 0;
        for (int c = 0; c < 8; c++) e[k] += v[b][0][c][k];
      end
      peek(b, 0, 31, t1);
      chk(t1 == e, $sformatf("sum bank %0d", b));
      for (int k = 0; k < 8; k++) begin
        e[k] = 1000;
        for (int c = 0; c < 8; c++) if (v[b][1][c][k] < e[k]) e[k] = v[b][1][c][k];
      end
      peek(b, 1, 31, t1);
      chk(t1 == e, $sformatf("min bank %0d", b));
      peek(b, 0, 32, t1);
      chk(t1 == e, $sformatf("min (row 0) bank %0d", b));
      chk(n_pre_bank[b] >= 2, "row conflict precharges");
    end
    // ---- project in group 1: 512 tuples in bank 1 row 2, bitmask in bank 0 row 0
    begin
      logic [511:0] bm;
      elem_t ex[$];
      for (int c = 0; c < 64; c++) begin
        for (int k = 0; k < 8; k++) w[k] = 32'(c * 8 + k + 100);
        poke(5, 2, c, w);
      end
      for (int t = 0; t < 512; t++) begin
        bm[t] = ($urandom_range(0, 3) == 0);
        if (bm[t]) ex.push_back(32'(t + 100));
      end
      poke(4, 0, 0, bm[255:0]);
      poke(4, 0, 1, bm[511:256]);
      send(i_mv(1, 0, 0, 0, 0, MLOC_MEM, MLOC_BGPU, 0, 2));
      send(i_bg(1, GOP_SETUP_IN, 1, 2, 0, 0));
      send(i_bg(1, GOP_SETUP_OUT, 0, 3, 0, 0));
      send(i_bg(1, GOP_SETUP_NUM, 0, 0, 0, 512));
      send(i_bg(1, GOP_START, 0, 0, 0, 0));
      while (!project_done[1]) @(negedge clk);
      chk(out_count[1] == 16'(ex.size()), "project count");
      for (int i = 0; i < (ex.size() + 7) / 8; i++) begin
        peek(4 + (i % 4), 3, i / 4, t1);
        w = t1;
        for (int k = 0; k < 8; k++)
          chk(w[k] == ((8*i + k < ex.size()) ? ex[8*i + k] : 0), $sformatf("project out %0d", 8*i + k));
      end
    end
    // ---- chip buffer: group 0 bank 2 row 0 columns 0..3 to group 3 bank 1 row 2 columns 5..8
    send(i_mv(0, 2, 0, 0, 10, MLOC_MEM, MLOC_CHIPBUF, 0, 4));
    settle(100);
    send(i_mv(3, 1, 2, 5, 10, MLOC_CHIPBUF, MLOC_MEM, 0, 4));
    settle(100);
    for (int c = 0; c < 4; c++) begin
      peek(13, 2, 5 + c, t1);
      peek(2, 0, c, t2);
      chk(t1 == t2 && t1 != 0, $sformatf("chip buffer word %0d", c));
    end
    // ---- rank buffer port
    send(i_mv(2, 0, 0, 0, 20, MLOC_MEM, MLOC_RANKBUF, 0, 2));
    send(i_mv(2, 3, 1, 40, 5, MLOC_RANKBUF, MLOC_MEM, 8'b00_01_10_11, 2));
    settle(100);
    chk(n_rb_wr == 2, "rank buffer writes");
    peek(8, 0, 0, t1);
    peek(8, 0, 1, t2);
    chk(rb_seen[20] == t1 && rb_seen[21] == t2, "to rank buffer");
    for (int c = 0; c < 2; c++) begin
      word_t x, y;
      x = rbword(6'(5 + c));
      y = {x[63:0], x[127:64], x[191:128], x[255:192]};
      peek(11, 1, 40 + c, t1);
      chk(t1 == y, "from rank buffer");
    end
    for (int i = 0; i < NB; i++) chk(n_err_bank[i] == 0, $sformatf("bank protocol %0d: %0d", i, n_err_bank[i]));
    $display("ready stalls %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

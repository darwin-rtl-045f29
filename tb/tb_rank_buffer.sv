// tb_rank_buffer: encodes random concatenated instructions (eight 64-bit
// instructions as eight 64-bit data-pin beats) and checks that every chip
// receives its two instructions intact and in order; moves words into the
// buffer from several chips at once and reads them back with random quarter
// permutations; and reads 64 bytes out to the host through the DQ aligner.
module tb_rank_buffer;
  import darwin_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0, dq_valid = 0, host_rd_req = 0, host_rd_valid;
  logic [63:0] dq = '0, host_rd_beat;
  logic [NC-1:0] inst_valid, chip_wr_en = '0;
  logic [63:0] inst [NC];
  logic [5:0] chip_wr_idx [NC], chip_rd_idx [NC], host_rd_idx = '0;
  word_t chip_wr_data [NC], chip_rd_data [NC];
  logic [7:0] chip_rd_pidx [NC];
  int checks = 0, failures = 0;
  logic [63:0] exp_i [NC][$];
  word_t model [64];

  rank_buffer #(.NUM_CHIPS(NC), .DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int c = 0; c < NC; c++) if (inst_valid[c]) begin
      checks++;
      if (exp_i[c].size() == 0 || inst[c] != exp_i[c][0]) begin
        failures++; $display("FAIL chip %0d instruction %h", c, inst[c]);
      end
      if (exp_i[c].size() != 0) void'(exp_i[c].pop_front());
    end

  // instruction i: lane i%4 of beats 4(i/4)..4(i/4)+3, high slice first
  task automatic send_cimt(logic [63:0] ins [8]);
    for (int i = 0; i < 8; i++) exp_i[i % 4].push_back(ins[i]);
    for (int b = 0; b < 8; b++) begin
      @(negedge clk);
      for (int l = 0; l < 4; l++) dq[16*l +: 16] = ins[4*(b/4) + l][16*(3 - b%4) +: 16];
      dq_valid = 1;
    end
  endtask

  initial begin
    logic [63:0] ins [8];
    for (int c = 0; c < NC; c++) begin
      chip_wr_idx[c] = '0; chip_rd_idx[c] = '0; chip_wr_data[c] = '0; chip_rd_pidx[c] = 8'b11_10_01_00;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // concatenated instructions, back to back and with gaps
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 8; i++) ins[i] = {$urandom, $urandom};
      send_cimt(ins);
      if (t % 3 == 0) begin @(negedge clk); dq_valid = 0; repeat ($urandom_range(0, 4)) @(negedge clk); end
    end
    @(negedge clk); dq_valid = 0;
    repeat (3) @(negedge clk);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (exp_i[c].size() != 0) begin failures++; $display("FAIL chip %0d missing instructions", c); end
    end
    // fill the buffer; several chips write in one cycle (the lowest chip wins)
    for (int i = 0; i < 64; i++) model[i] = '0;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      chip_wr_en = 4'($urandom);
      for (int c = 0; c < NC; c++) begin
        chip_wr_idx[c] = 6'($urandom_range(0, 63));
        chip_wr_data[c] = {8{$urandom}};
      end
      if (it < 64) begin chip_wr_en = 4'b0001; chip_wr_idx[0] = 6'(it); end
      for (int c = NC - 1; c >= 0; c--) if (chip_wr_en[c]) model[chip_wr_idx[c]] = chip_wr_data[c];
    end
    @(negedge clk); chip_wr_en = '0;
    // chip reads with permutation
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) begin chip_rd_idx[c] = 6'($urandom); chip_rd_pidx[c] = 8'($urandom); end
      #1;
      for (int c = 0; c < NC; c++) begin
        word_t w, e;
        w = model[chip_rd_idx[c]];
        for (int q = 0; q < 4; q++) e[64*q +: 64] = w[64*chip_rd_pidx[c][2*q +: 2] +: 64];
        checks++;
        if (chip_rd_data[c] != e) begin failures++; $display("FAIL permuted read chip %0d", c); end
      end
    end
    // host read-out: 64 bytes as eight 64-bit beats
    for (int t = 0; t < 5; t++) begin
      logic [511:0] e;
      int nb;
      host_rd_idx = 6'(2 * t + 10);
      e = {model[host_rd_idx + 1], model[host_rd_idx]};
      @(negedge clk); host_rd_req = 1;
      @(negedge clk); host_rd_req = 0;
      nb = 0;
      for (int cy = 0; cy < 30; cy++) begin
        if (host_rd_valid) begin
          checks++;
          if (host_rd_beat != e[64*nb +: 64]) begin failures++; $display("FAIL host beat %0d", nb); end
          nb++;
        end
        @(negedge clk);
      end
      checks++;
      if (nb != 8) begin failures++; $display("FAIL host beats %0d", nb); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

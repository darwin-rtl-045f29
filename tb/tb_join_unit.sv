// tb_join_unit: loads random sorted key vectors for R (unique keys) and S
// (keys may repeat), runs the merge, and checks that the output pairs are
// exactly the matching (R OID, S OID) pairs in order, plus the pair count
// and a throughput bound of two merge steps per cycle.
module tb_join_unit;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, oid_load = 0, oid_sel_s = 0, start = 0, out_ready = 1, flush = 0;
  word_t [3:0] keys_r = '0, keys_s = '0;
  logic [1:0] oid_slot = 0;
  word_t oid_data = '0, push_data;
  logic [5:0] n_r = 0, n_s = 0;
  logic push, done;
  logic [15:0] n_pairs;
  int checks = 0, failures = 0;
  elem_t exp_q[$];
  int padding = 0;

  join_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && push) begin
    elem_t [7:0] w;
    w = push_data;
    for (int k = 0; k < 8; k++) begin
      if (exp_q.size() > 0) begin
        checks++;
        if (w[k] != exp_q[0]) begin failures++; $display("FAIL lane %0d got %0d exp %0d", k, w[k], exp_q[0]); end
        void'(exp_q.pop_front());
      end else if (w[k] != 0) begin failures++; $display("FAIL pad"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 100; rep++) begin
      elem_t [31:0] kr, ks, orr, os;
      int nr, ns, v, t0, cycles, np;
      nr = $urandom_range(0, 32); ns = $urandom_range(0, 32);
      if (rep == 0) begin nr = 32; ns = 32; end
      v = $urandom_range(0, 3) - 20;
      for (int i = 0; i < 32; i++) begin
        v += $urandom_range(1, 3);
        kr[i] = (i < nr) ? v : 32'h7fff_ffff;
        orr[i] = 32'(5000 + i);
      end
      v = -21;
      for (int j = 0; j < 32; j++) begin
        v += (rep == 0) ? 1 : $urandom_range(0, 3);
        ks[j] = (j < ns) ? v : 32'h7fff_ffff;
        os[j] = 32'(9000 + j);
      end
      np = 0;
      for (int j = 0; j < ns; j++)
        for (int i = 0; i < nr; i++)
          if (kr[i] == ks[j]) begin exp_q.push_back(orr[i]); exp_q.push_back(os[j]); np++; end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      keys_r = kr; keys_s = ks;
      for (int s = 0; s < 8; s++) begin
        @(negedge clk);
        oid_load = 1; oid_sel_s = s[2]; oid_slot = 2'(s);
        oid_data = s[2] ? os[8*(s%4) +: 8] : orr[8*(s%4) +: 8];
      end
      @(negedge clk); oid_load = 0; start = 1; n_r = 6'(nr); n_s = 6'(ns);
      @(negedge clk); start = 0; t0 = 0;
      while (!done) begin
        @(negedge clk); t0++;
        out_ready = (rep % 3 == 2) ? ($urandom_range(0, 1) == 1) : 1'b1;
      end
      out_ready = 1;
      cycles = t0;
      @(negedge clk); flush = 1;
      @(negedge clk); flush = 0;
      repeat (2) @(negedge clk);
      checks += 2;
      if (exp_q.size() != 0) begin failures++; $display("FAIL rep %0d missing %0d", rep, exp_q.size()); exp_q.delete(); end
      if (n_pairs != 16'(np)) begin failures++; $display("FAIL pairs %0d vs %0d", n_pairs, np); end
      if (rep % 3 != 2) begin
        checks++;
        if (cycles > (nr + ns + 1) / 2 + 1) begin failures++; $display("FAIL rate %0d cycles for %0d+%0d", cycles, nr, ns); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ope: loads both OID registers, applies sort-stage exchanges with random
// swap flags and patterns, and compares the OID registers with a reference.
module tb_ope;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sort_en = 0, load_a = 0, load_b = 0;
  logic [2:0] pattern = 0;
  logic [7:0] swap = 0;
  logic [1:0] slot_a = 0, slot_b = 0, load_slot = 0;
  word_t load_data = '0;
  word_t [3:0] oid_a, oid_b;
  elem_t [3:0][7:0] ra, rb;
  int checks = 0, failures = 0;
  int masks[7] = '{1, 3, 2, 7, 4, 15, 8};

  ope dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 4; s++) begin
      for (int k = 0; k < 8; k++) begin ra[s][k] = 32'(s*8 + k); rb[s][k] = 32'(100 + s*8 + k); end
      @(negedge clk); load_a = 1; load_b = 0; load_slot = 2'(s); load_data = ra[s];
      @(negedge clk); load_a = 0; load_b = 1; load_data = rb[s];
    end
    @(negedge clk); load_b = 0;
    for (int it = 0; it < 200; it++) begin
      elem_t [15:0] v, g;
      int p, top, n;
      p = $urandom_range(0, 6);
      @(negedge clk);
      sort_en = 1; pattern = 3'(p); swap = 8'($urandom); slot_a = 2'($urandom); slot_b = 2'($urandom);
      v = {rb[slot_b], ra[slot_a]};
      top = (masks[p] >= 8) ? 8 : (masks[p] >= 4) ? 4 : (masks[p] >= 2) ? 2 : 1;
      g = v; n = 0;
      for (int i = 0; i < 16; i++) if ((i & top) == 0) begin
        if (swap[n]) begin g[i] = v[i ^ masks[p]]; g[i ^ masks[p]] = v[i]; end
        n++;
      end
      ra[slot_a] = g[7:0];
      rb[slot_b] = g[15:8];
      @(negedge clk); sort_en = 0;
      for (int s = 0; s < 4; s++) begin
        checks += 2;
        if (oid_a[s] != word_t'(ra[s])) begin failures++; $display("FAIL A slot %0d it %0d", s, it); end
        if (oid_b[s] != word_t'(rb[s])) begin failures++; $display("FAIL B slot %0d it %0d", s, it); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

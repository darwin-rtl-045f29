// tb_project_unit: random 32-byte inputs with random lane selects; checks
// that the pushed words are exactly the selected tuples in order, eight per
// word, that a flush pads the last word with zeros, and the tuple count.
module tb_project_unit;
  import darwin_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, flush = 0, push;
  word_t in_data = '0, push_data;
  logic [7:0] in_sel = 0;
  logic [15:0] n_out;
  elem_t exp_q[$];
  int checks = 0, failures = 0, total = 0;

  project_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && push) begin
    elem_t [7:0] w;
    w = push_data;
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (exp_q.size() > 0) begin
        if (w[k] != exp_q[0]) begin failures++; $display("FAIL lane %0d %h vs %h", k, w[k], exp_q[0]); end
        void'(exp_q.pop_front());
      end else if (w[k] != 0) begin failures++; $display("FAIL pad"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      elem_t [7:0] d;
      @(negedge clk);
      for (int k = 0; k < 8; k++) d[k] = $urandom;
      in_data = d; in_sel = 8'($urandom); in_valid = 1;
      if (it % 50 == 0) in_sel = 8'hFF;
      if (it % 50 == 1) in_sel = 8'h00;
      for (int k = 0; k < 8; k++) if (in_sel[k]) begin exp_q.push_back(d[k]); total++; end
    end
    @(negedge clk); in_valid = 0; flush = 1;
    @(negedge clk); flush = 0;
    repeat (3) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("FAIL left %0d", exp_q.size()); end
    if (n_out != 16'(total)) begin failures++; $display("FAIL n_out %0d vs %0d", n_out, total); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dq_aligner: streams random 32-bit beats with random gaps and checks
// every 64-bit output beat (two consecutive inputs, the earlier one in the
// low half) and its latency of one cycle after the second input beat.
module tb_dq_aligner;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] in_beat = '0;
  logic [63:0] out_beat;
  int checks = 0, failures = 0;
  logic [63:0] exp_q[$];
  int exp_t[$];
  int cyc = 0, n_in = 0;
  logic [31:0] first;

  dq_aligner #(.IN_W(32), .OUT_W(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("FAIL extra beat"); end
      else begin
        if (out_beat != exp_q[0]) begin failures++; $display("FAIL beat %h vs %h", out_beat, exp_q[0]); end
        if (cyc != exp_t[0]) begin failures++; $display("FAIL latency at %0d, expected %0d", cyc, exp_t[0]); end
        void'(exp_q.pop_front());
        void'(exp_t.pop_front());
      end
    end
    if (rst_n && in_valid) begin
      if (n_in % 2 == 0) first = in_beat;
      else begin exp_q.push_back({in_beat, first}); exp_t.push_back(cyc + 1); end
      n_in++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      in_valid = (it < 400) ? 1'b1 : ($urandom_range(0, 2) != 0);
      in_beat = $urandom;
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing beats"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

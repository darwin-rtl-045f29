// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, count, full and empty.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [255:0] wdata = '0, rdata;
  logic [3:0] count;
  logic [255:0] q[$];
  int checks = 0, failures = 0;

  sync_fifo #(.T(logic [255:0]), .DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      checks += 3;
      if (count != 4'(q.size())) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
      if (full != (q.size() == 8)) failures++;
      if (empty != (q.size() == 0)) failures++;
      if (q.size() > 0) begin
        checks++;
        if (rdata != q[0]) begin failures++; $display("FAIL data"); end
      end
      pop  = (q.size() > 0) && ($urandom_range(0, 99) < ((it / 500) % 2 ? 70 : 30));
      push = ((q.size() < 8) || pop) && ($urandom_range(0, 99) < 50);
      wdata = {8{$urandom}};
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

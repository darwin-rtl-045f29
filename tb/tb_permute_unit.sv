// tb_permute_unit: checks the seven pair patterns and the identity of the
// permute unit, that the inverse network undoes the forward one, and that the
// ten-stage pattern sequence A; B,A; D,C,A; F,E,C,A with min/max between the
// two networks sorts sixteen random values.
module tb_permute_unit;
  import darwin_pkg::*;
  logic [2:0] pattern;
  logic       inverse;
  elem_t [15:0] din, dout, din2, dout2;
  int checks = 0, failures = 0;

  permute_unit fwd (.pattern(pattern), .inverse(1'b0), .din(din), .dout(dout));
  permute_unit inv (.pattern(pattern), .inverse(1'b1), .din(din2), .dout(dout2));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s pattern=%0d", what, pattern); end
  endtask

  int masks[7] = '{1, 3, 2, 7, 4, 15, 8};

  initial begin
    inverse = 0;
    for (int p = 0; p < 8; p++) begin
      for (int it = 0; it < 10; it++) begin
        int n;
        for (int i = 0; i < 16; i++) din[i] = $urandom;
        pattern = 3'(p);
        #1;
        din2 = dout;
        #1;
        if (p == 7) begin
          check(dout == din, "identity");
        end else begin
          int top;
          top = (masks[p] >= 8) ? 8 : (masks[p] >= 4) ? 4 : (masks[p] >= 2) ? 2 : 1;
          n = 0;
          for (int i = 0; i < 16; i++) begin
            if ((i & top) == 0) begin
              check(dout[n] == din[i], "lower member");
              check(dout[n+8] == din[i ^ masks[p]], "partner");
              n++;
            end
          end
        end
        check(dout2 == din, "inverse");
      end
    end
    // full bitonic sort of 16 values with the pattern sequence
    for (int it = 0; it < 20; it++) begin
      int seq[10] = '{0, 1, 0, 3, 2, 0, 5, 4, 2, 0};
      elem_t [15:0] v;
      for (int i = 0; i < 16; i++) v[i] = $urandom_range(0, 1000);
      for (int s = 0; s < 10; s++) begin
        pattern = 3'(seq[s]);
        din = v;
        #1;
        for (int k = 0; k < 8; k++) begin
          if (dout[k] > dout[k+8]) begin
            din2[k] = dout[k+8]; din2[k+8] = dout[k];
          end else begin
            din2[k] = dout[k]; din2[k+8] = dout[k+8];
          end
        end
        #1;
        v = dout2;
      end
      for (int i = 0; i < 15; i++) check(v[i] <= v[i+1], "sorted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_simd_unit: checks every lane of the SIMD unit against a reference model
// for all operations on random and corner-case operands.
module tb_simd_unit;
  import darwin_pkg::*;
  bpu_op_e op;
  elem_t [7:0] a, b, result, vmax, vmin;
  logic  [7:0] bitmask;
  int checks = 0, failures = 0;

  simd_unit dut (.op(op), .a(a), .b(b), .result(result), .vmax(vmax), .vmin(vmin), .bitmask(bitmask));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s op=%0d", what, op); end
  endtask

  initial begin
    bpu_op_e ops[9] = '{BOP_ADD, BOP_SUB, BOP_MUL, BOP_MIN, BOP_MAX, BOP_SORT, BOP_CMP_LT, BOP_CMP_GT, BOP_CMP_EQ};
    for (int it = 0; it < 300; it++) begin
      for (int k = 0; k < 8; k++) begin
        a[k] = (it % 5 == 0) ? elem_t'($urandom_range(0, 3)) : $urandom;
        b[k] = (it % 5 == 0) ? elem_t'($urandom_range(0, 3)) : $urandom;
        if (it % 7 == 0) b[k] = 32'h8000_0000;
      end
      op = ops[it % 9];
      #1;
      for (int k = 0; k < 8; k++) begin
        longint sa, sb;
        logic [31:0] exp_r;
        logic exp_m;
        sa = longint'($signed(a[k]));
        sb = longint'($signed(b[k]));
        case (op)
          BOP_SUB: exp_r = 32'(sa - sb);
          BOP_MUL: exp_r = 32'(sa * sb);
          default: exp_r = 32'(sa + sb);
        endcase
        case (op)
          BOP_CMP_LT: exp_m = sa < sb;
          BOP_CMP_EQ: exp_m = sa == sb;
          default:    exp_m = sa > sb;
        endcase
        check(result[k] == exp_r, "result");
        check(vmax[k] == 32'((sa > sb) ? sa : sb), "max");
        check(vmin[k] == 32'((sa > sb) ? sb : sa), "min");
        check(bitmask[k] == exp_m, "bitmask");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

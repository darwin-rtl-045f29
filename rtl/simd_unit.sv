// simd_unit: the eight-lane 4-byte SIMD datapath of a bank processing unit.
//
// Each lane adds, subtracts or multiplies its two operands and also produces
// their minimum, maximum and a one-bit comparison. The comparison bit is the
// selection bit of a 'select' (less than, greater than or equal, chosen by
// the operation code) and, for every other operation, the exchange flag of a
// sorting stage (operand a greater than operand b). Eight lanes of 4 bytes
// match the 32-byte access of one bank, as the paper describes. The number
// format is this design's choice: signed integers, with the product truncated
// to its low 32 bits. Purely combinational.
module simd_unit
  import darwin_pkg::*;
#(
  parameter int LANES_P = LANES
) (
  input  bpu_op_e             op,
  input  elem_t [LANES_P-1:0] a,
  input  elem_t [LANES_P-1:0] b,
  output elem_t [LANES_P-1:0] result,
  output elem_t [LANES_P-1:0] vmax,
  output elem_t [LANES_P-1:0] vmin,
  output logic  [LANES_P-1:0] bitmask
);

  always_comb begin
    for (int k = 0; k < LANES_P; k++) begin
      logic signed [DATA_W-1:0] sa, sb;
      logic signed [2*DATA_W-1:0] prod;
      sa   = a[k];
      sb   = b[k];
      prod = sa * sb;
      unique case (op)
        BOP_SUB: result[k] = sa - sb;
        BOP_MUL: result[k] = prod[DATA_W-1:0];
        default: result[k] = sa + sb;
      endcase
      vmax[k] = (sa > sb) ? sa : sb;
      vmin[k] = (sa > sb) ? sb : sa;
      unique case (op)
        BOP_CMP_LT: bitmask[k] = (sa < sb);
        BOP_CMP_EQ: bitmask[k] = (sa == sb);
        default:    bitmask[k] = (sa > sb);
      endcase
    end
  end

endmodule

// bpu: bank processing unit, one per DRAM bank.
//
// A BPU executes the regular analytics operators (select, aggregate and the
// stages of a bitonic sort) on the 32-byte words its bank delivers. It holds
// row registers A and B (128 bytes each, four 32-byte slots), a 512-bit
// bitmask register and the OID processing engine. Operand 1 comes from the
// bank, row register A or OID register A; operand 2 is always a slot of row
// register B. The operands pass an input permute unit, the eight-lane SIMD
// unit, two multiplexers (result/max and max/min) and an output permute unit,
// as in the paper's block diagram; sort results loop back into row registers
// A and B, and the OIDs follow them through the OPE.
//
// Interface: one PIM command per cycle on cmd/cmd_valid, already aligned with
// the bank's read data (the bank-group logic delays each issued command by the
// read latency). A command acts only if its route is RT_BPU. Register slot
// rules (this design's choice): operand 1 of a register source uses the low
// bits of the first column address, the destination, operand 2 and the source
// of a STORE use the low bits of the second column address. A compare writes
// eight bitmask bits at position 8 x (first column address), so 64 reads of a
// row fill the 512-bit register. A STORE drives wdata in the same cycle.
module bpu
  import darwin_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     cmd_valid,
  input  pim_cmd_t cmd,
  input  word_t    rdata,
  output word_t    wdata
);

  word_t [REG_SLOTS-1:0] row_a, row_b, oid_a, oid_b;
  logic [BITMASK_W-1:0]  bitmask;

  logic       act;
  logic [1:0] slot1, slot2;
  word_t      op1, op2, res_word, store_word;
  elem_t [15:0] pin, pout, sin, sout;
  elem_t [7:0]  result, vmax, vmin, left, right;
  logic  [7:0]  bm;
  logic         is_sort;

  assign act     = cmd_valid && (cmd.route == RT_BPU);
  assign slot1   = cmd.col[1:0];
  assign slot2   = cmd.col2[1:0];
  assign is_sort = (cmd.bop == BOP_SORT);

  function automatic word_t pick(input logic [2:0] loc, input logic [1:0] s, input word_t mem,
                                 input word_t [REG_SLOTS-1:0] ra, input word_t [REG_SLOTS-1:0] rb,
                                 input word_t [REG_SLOTS-1:0] oa, input word_t [REG_SLOTS-1:0] ob,
                                 input logic [BITMASK_W-1:0] bmr);
    unique case (loc)
      LOC_ROWA:    pick = ra[s];
      LOC_OIDA:    pick = oa[s];
      LOC_ROWB:    pick = rb[s];
      LOC_OIDB:    pick = ob[s];
      LOC_BITMASK: pick = s[0] ? bmr[BITMASK_W-1:IO_W] : bmr[IO_W-1:0];
      default:     pick = mem;
    endcase
  endfunction

  assign op1        = pick(cmd.src, slot1, rdata, row_a, row_b, oid_a, oid_b, bitmask);
  assign op2        = row_b[slot2];
  assign store_word = pick(cmd.src, slot2, rdata, row_a, row_b, oid_a, oid_b, bitmask);

  // input permute unit: operand 1 in positions 0-7, operand 2 in 8-15
  assign pin = {op2, op1};
  permute_unit u_perm_in (
    .pattern(is_sort ? cmd.perm : 3'd7), .inverse(1'b0), .din(pin), .dout(pout)
  );

  simd_unit u_simd (
    .op(cmd.bop), .a(pout[7:0]), .b(pout[15:8]),
    .result(result), .vmax(vmax), .vmin(vmin), .bitmask(bm)
  );

  // result/max and max/min multiplexers
  assign left  = (cmd.bop == BOP_MAX || is_sort) ? vmax : result;
  assign right = (cmd.bop == BOP_MIN || is_sort) ? vmin : vmax;
  assign res_word = (cmd.bop == BOP_MIN) ? word_t'(right) : word_t'(left);

  // output permute unit: minimum back to the lower member of each pair
  assign sin = {left, right};
  permute_unit u_perm_out (
    .pattern(is_sort ? cmd.perm : 3'd7), .inverse(1'b1), .din(sin), .dout(sout)
  );

  // OID processing engine
  logic oid_load_a, oid_load_b;
  word_t oid_load_data;     // value written by a LOAD or an arithmetic op
  always_comb begin
    oid_load_a    = 1'b0;
    oid_load_b    = 1'b0;
    oid_load_data = (cmd.bop == BOP_LOAD) ? op1 : res_word;
    if (act && cmd.bop inside {BOP_ADD, BOP_SUB, BOP_MUL, BOP_MIN, BOP_MAX, BOP_LOAD}) begin
      oid_load_a = (cmd.dst == LOC_OIDA);
      oid_load_b = (cmd.dst == LOC_OIDB);
    end
  end

  ope u_ope (
    .clk(clk), .rst_n(rst_n),
    .sort_en(act && is_sort), .pattern(cmd.perm), .swap(bm),
    .slot_a(slot1), .slot_b(slot2),
    .load_a(oid_load_a), .load_b(oid_load_b), .load_slot(slot2), .load_data(oid_load_data),
    .oid_a(oid_a), .oid_b(oid_b)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_a   <= '0;
      row_b   <= '0;
      bitmask <= '0;
    end else if (act) begin
      unique case (cmd.bop)
        BOP_ADD, BOP_SUB, BOP_MUL, BOP_MIN, BOP_MAX, BOP_LOAD: begin
          unique case (cmd.dst)
            LOC_ROWA: row_a[slot2] <= oid_load_data;
            LOC_ROWB: row_b[slot2] <= oid_load_data;
            LOC_BITMASK: begin
              if (slot2[0]) bitmask[BITMASK_W-1:IO_W] <= oid_load_data;
              else          bitmask[IO_W-1:0]         <= oid_load_data;
            end
            default: ;
          endcase
        end
        BOP_CMP_LT, BOP_CMP_GT, BOP_CMP_EQ:
          bitmask[{cmd.col, 3'b000} +: LANES] <= bm;
        BOP_SORT: begin
          row_a[slot1] <= sout[7:0];
          row_b[slot2] <= sout[15:8];
        end
        default: ;
      endcase
    end
  end

  assign wdata = (act && cmd.bop == BOP_STORE) ? store_word : '0;

endmodule

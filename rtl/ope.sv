// ope: OID processing engine of a bank processing unit.
//
// Holds OID register A and OID register B (128 bytes each, four 32-byte
// slots of eight 4-byte OIDs) and, during a sorting stage, moves the OIDs of
// the two selected slots through the same compare-exchange as the data: the
// OIDs are gathered with the stage's pattern, exchanged where the SIMD unit
// reported operand 1 greater than operand 2, and scattered back. This keeps
// every key paired with its OID without extra instructions, as the paper
// describes; the register sizes follow the paper, the port arrangement is
// this design's own. Loads and the sort update take effect at the clock
// edge; the register contents are visible on oid_a/oid_b.
module ope
  import darwin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sort_en,
  input  logic [2:0]  pattern,
  input  logic [7:0]  swap,
  input  logic [1:0]  slot_a,
  input  logic [1:0]  slot_b,
  input  logic        load_a,
  input  logic        load_b,
  input  logic [1:0]  load_slot,
  input  word_t       load_data,
  output word_t [REG_SLOTS-1:0] oid_a,
  output word_t [REG_SLOTS-1:0] oid_b
);

  elem_t [15:0] gathered, exchanged, scattered;

  permute_unit u_gather (
    .pattern(pattern), .inverse(1'b0),
    .din({oid_b[slot_b], oid_a[slot_a]}), .dout(gathered)
  );

  always_comb begin
    for (int k = 0; k < 8; k++) begin
      exchanged[k]     = swap[k] ? gathered[k + 8] : gathered[k];
      exchanged[k + 8] = swap[k] ? gathered[k]     : gathered[k + 8];
    end
  end

  permute_unit u_scatter (
    .pattern(pattern), .inverse(1'b1),
    .din(exchanged), .dout(scattered)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oid_a <= '0;
      oid_b <= '0;
    end else begin
      if (sort_en) begin
        oid_a[slot_a] <= scattered[7:0];
        oid_b[slot_b] <= scattered[15:8];
      end
      if (load_a) oid_a[load_slot] <= load_data;
      if (load_b) oid_b[load_slot] <= load_data;
    end
  end

endmodule

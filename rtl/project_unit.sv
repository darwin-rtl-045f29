// project_unit: the index selector and output register of the BGPU's
// project operator.
//
// Each input is one 32-byte read of the projected attribute (eight 4-byte
// tuples) with an 8-bit lane select taken from the selection bitmask or from
// a decoded OID. The selected tuples are packed, in lane order, behind those
// already waiting in the output register; as soon as eight are waiting they
// leave as one 32-byte word on push/push_data (at most one word per input, so
// one input per tCCDL keeps pace with the bank group as the paper requires).
// flush pushes a final partial word padded with zeros. n_out counts tuples.
// Inputs are registered; push is valid in the cycle after the input.
module project_unit
  import darwin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  word_t       in_data,
  input  logic [7:0]  in_sel,
  input  logic        flush,
  output logic        push,
  output word_t       push_data,
  output logic [15:0] n_out
);

  elem_t [7:0]  stage;
  logic  [3:0]  cnt;
  elem_t [15:0] merged;
  logic  [4:0]  total;
  elem_t [7:0]  lanes;

  assign lanes = in_data;

  // index selector: append selected lanes behind the waiting ones
  always_comb begin
    logic [4:0] p;
    merged = '0;
    for (int i = 0; i < 8; i++) merged[i] = stage[i];
    p = {1'b0, cnt};
    for (int i = 0; i < 8; i++) begin
      if (in_sel[i]) begin
        merged[p[3:0]] = lanes[i];
        p = p + 1'b1;
      end
    end
    total = p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage     <= '0;
      cnt       <= '0;
      push      <= 1'b0;
      push_data <= '0;
      n_out     <= '0;
    end else begin
      push <= 1'b0;
      if (clear) begin
        stage <= '0;
        cnt   <= '0;
        n_out <= '0;
      end else if (in_valid) begin
        n_out <= n_out + 16'(total - {1'b0, cnt});
        if (total >= 5'd8) begin
          push      <= 1'b1;
          push_data <= merged[7:0];
          stage     <= merged[15:8];
          cnt       <= 4'(total - 5'd8);
        end else begin
          stage <= merged[7:0];
          cnt   <= total[3:0];
        end
      end else if (flush && cnt != '0) begin
        push      <= 1'b1;
        push_data <= stage;
        stage     <= '0;
        cnt       <= '0;
      end
    end
  end

endmodule

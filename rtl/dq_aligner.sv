// dq_aligner: re-beats a 64-byte transaction for the module's data pins.
//
// A DRAM type other than the one the host expects may deliver a 64-byte
// transaction in narrower beats (for example 32 bits with burst length 16).
// The aligner gathers OUT_W/IN_W consecutive input beats, earlier beats in
// the lower bits, and emits them as one OUT_W-bit beat, so the host sees the
// usual 64 bits with burst length 8. An output beat is valid in the cycle
// after its last input beat. The regrouping is the paper's; the bit order is
// this design's own.
module dq_aligner #(
  parameter int IN_W  = 32,
  parameter int OUT_W = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_beat,
  output logic             out_valid,
  output logic [OUT_W-1:0] out_beat
);

  localparam int R  = OUT_W / IN_W;
  localparam int RW = (R > 1) ? $clog2(R) : 1;

  logic [OUT_W-1:0] acc;
  logic [RW-1:0]    n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      n         <= '0;
      out_valid <= 1'b0;
      out_beat  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (32'(n) == R - 1) begin
          out_valid <= 1'b1;
          out_beat  <= acc;
          out_beat[n*IN_W +: IN_W] <= in_beat;
          n <= '0;
        end else begin
          acc[n*IN_W +: IN_W] <= in_beat;
          n <= n + 1'b1;
        end
      end
    end
  end

endmodule

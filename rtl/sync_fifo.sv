// sync_fifo: synchronous first-in first-out buffer.
//
// Used as the BGPU output FIFO (eight 32-byte entries), as the bank-group
// command queue and as the instruction buffer. Registers are written on push
// and the head entry is always visible on rdata; push on a full FIFO and pop
// on an empty one are errors, caught by assertions. A push and a pop in the
// same cycle are allowed. The element type is a parameter.
module sync_fifo #(
  parameter type T     = logic [255:0],
  parameter int  DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  input  T     wdata,
  input  logic pop,
  output T     rdata,
  output logic full,
  output logic empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign rdata = mem[rp];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    inc = (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= inc(wp);
      if (pop) rp <= inc(rp);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  // storage needs no reset: only entries between rp and wp are read
  always_ff @(posedge clk) begin
    if (push) mem[wp] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule

// permute_unit: the fixed-pattern permutation network used around the SIMD
// unit of a bank processing unit for bitonic sorting.
//
// Sixteen 4-byte elements (operand 1 in positions 0-7, operand 2 in 8-15)
// are re-ordered so that the eight compare pairs of one bitonic stage face
// each other: output positions 0-7 carry the lower-index member of each pair
// and 8-15 the partner. With 'inverse' set the network does the opposite and
// puts the pair members back in place, which is the output-side permute unit.
// Pattern 0-6 are the seven stage shapes of a 16-element bitonic sorter in
// its half-cleaner form; the partner of element i is i XOR mask with masks
// 1, 3, 2, 7, 4, 15, 8. The paper names seven patterns (A)-(G) and a
// 'permute case' 0-6; which case is which shape is this design's reading of
// the drawing. Pattern 7 is the identity. Purely combinational.
module permute_unit
  import darwin_pkg::*;
(
  input  logic [2:0]   pattern,
  input  logic         inverse,
  input  elem_t [15:0] din,
  output elem_t [15:0] dout
);

  function automatic logic [3:0] pat_mask(input logic [2:0] p);
    unique case (p)
      3'd0: pat_mask = 4'd1;
      3'd1: pat_mask = 4'd3;
      3'd2: pat_mask = 4'd2;
      3'd3: pat_mask = 4'd7;
      3'd4: pat_mask = 4'd4;
      3'd5: pat_mask = 4'd15;
      3'd6: pat_mask = 4'd8;
      default: pat_mask = 4'd0;
    endcase
  endfunction

  // position of the lower pair member for lane k: a 0 inserted at the top
  // bit of the mask
  function automatic logic [3:0] lo_index(input logic [3:0] m, input logic [2:0] k);
    logic [3:0] kk;
    kk = {1'b0, k};
    if (m[3])      lo_index = kk;
    else if (m[2]) lo_index = {kk[2], 1'b0, kk[1:0]};
    else if (m[1]) lo_index = {kk[2:1], 1'b0, kk[0]};
    else           lo_index = {kk[2:0], 1'b0};
  endfunction

  always_comb begin
    logic [3:0] m, lo, hi;
    m    = pat_mask(pattern);
    dout = din;
    lo   = '0;
    hi   = '0;
    if (m != 4'd0) begin
      for (int k = 0; k < 8; k++) begin
        lo = lo_index(m, 3'(k));
        hi = lo ^ m;
        if (!inverse) begin
          dout[k]     = din[lo];
          dout[k + 8] = din[hi];
        end else begin
          dout[lo] = din[k];
          dout[hi] = din[k + 8];
        end
      end
    end
  end

endmodule

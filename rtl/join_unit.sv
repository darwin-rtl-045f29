// join_unit: merge stage of the sort-merge join in the BGPU.
//
// Two sorted key vectors (relation R in vector register A, relation S in
// vector register B, up to 32 keys each) are merged by two cascaded
// comparators, i.e. two merge steps per cycle, as the paper's two-comparator
// join unit does to keep up with the bank group. The OIDs of both relations
// sit in the unit's own OID registers, loaded one 32-byte slot at a time. On
// equal keys the pair (R OID, S OID) is produced and only the S pointer
// advances, since every S tuple matches at most one R tuple; otherwise the
// pointer at the smaller key advances. Pairs collect in an output register
// and leave four at a time (one 32-byte word: R OID in even lanes, S OID in
// odd lanes) when out_ready allows; flush pushes a last partial word padded
// with zeros. start begins a merge over n_r and n_s tuples; done is high when
// it has finished. Keys compare as signed integers.
module join_unit
  import darwin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  word_t [REG_SLOTS-1:0] keys_r,
  input  word_t [REG_SLOTS-1:0] keys_s,
  input  logic        oid_load,
  input  logic        oid_sel_s,
  input  logic [1:0]  oid_slot,
  input  word_t       oid_data,
  input  logic        start,
  input  logic [5:0]  n_r,
  input  logic [5:0]  n_s,
  input  logic        out_ready,
  input  logic        flush,
  output logic        push,
  output word_t       push_data,
  output logic        done,
  output logic [15:0] n_pairs
);

  word_t [REG_SLOTS-1:0] oid_r, oid_s;
  elem_t [VEC_WORDS-1:0] kr, ks, orr, os;
  assign kr  = keys_r;
  assign ks  = keys_s;
  assign orr = oid_r;
  assign os  = oid_s;

  logic       running;
  logic [5:0] i, j, nr, ns;
  elem_t [5:0] pend;          // waiting output elements, pairs
  logic  [2:0] pcnt;          // waiting pairs (0..3)

  // two merge steps
  logic [5:0]  i1, j1, i2, j2;
  logic        e1, e2;
  elem_t       r1, s1, r2, s2;
  always_comb begin
    i1 = i; j1 = j; e1 = 1'b0; r1 = '0; s1 = '0;
    if (i < nr && j < ns) begin
      if ($signed(kr[i[4:0]]) == $signed(ks[j[4:0]])) begin
        e1 = 1'b1; r1 = orr[i[4:0]]; s1 = os[j[4:0]]; j1 = j + 1'b1;
      end else if ($signed(kr[i[4:0]]) < $signed(ks[j[4:0]])) i1 = i + 1'b1;
      else j1 = j + 1'b1;
    end
    i2 = i1; j2 = j1; e2 = 1'b0; r2 = '0; s2 = '0;
    if (i1 < nr && j1 < ns) begin
      if ($signed(kr[i1[4:0]]) == $signed(ks[j1[4:0]])) begin
        e2 = 1'b1; r2 = orr[i1[4:0]]; s2 = os[j1[4:0]]; j2 = j1 + 1'b1;
      end else if ($signed(kr[i1[4:0]]) < $signed(ks[j1[4:0]])) i2 = i1 + 1'b1;
      else j2 = j1 + 1'b1;
    end
  end

  // output OID selector: append the new pairs behind the waiting ones
  elem_t [11:0] slots;
  logic  [2:0]  tot;
  always_comb begin
    logic [2:0] p;
    slots = '0;
    for (int q = 0; q < 6; q++) slots[q] = pend[q];
    p = pcnt;
    if (e1) begin slots[2*p] = r1; slots[2*p+1] = s1; p = p + 1'b1; end
    if (e2) begin slots[2*p] = r2; slots[2*p+1] = s2; p = p + 1'b1; end
    tot = p;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oid_r <= '0; oid_s <= '0;
      running <= 1'b0; done <= 1'b0;
      i <= '0; j <= '0; nr <= '0; ns <= '0;
      pend <= '0; pcnt <= '0;
      push <= 1'b0; push_data <= '0; n_pairs <= '0;
    end else begin
      push <= 1'b0;
      if (oid_load) begin
        if (oid_sel_s) oid_s[oid_slot] <= oid_data;
        else           oid_r[oid_slot] <= oid_data;
      end
      if (clear) begin
        running <= 1'b0; done <= 1'b0; pend <= '0; pcnt <= '0; n_pairs <= '0;
      end else if (start) begin
        running <= 1'b1; done <= 1'b0;
        i <= '0; j <= '0; nr <= n_r; ns <= n_s;
      end else if (running && out_ready) begin
        i <= i2; j <= j2;
        n_pairs <= n_pairs + 16'(e1) + 16'(e2);
        if (tot >= 3'd4) begin
          push      <= 1'b1;
          push_data <= slots[7:0];
          pend      <= {128'd0, slots[9:8]};
          pcnt      <= tot - 3'd4;
        end else begin
          pend <= slots[5:0];
          pcnt <= tot;
        end
        if (!(i2 < nr && j2 < ns)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end else if (flush && pcnt != '0 && out_ready) begin
        push      <= 1'b1;
        push_data <= {64'd0, pend};
        pend      <= '0;
        pcnt      <= '0;
      end
    end
  end

endmodule

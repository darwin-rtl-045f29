// pim_cmd_generator: the PIM command generator of a bank group.
//
// Once the host has set up a project or join and started it, this block
// issues the bank-group's memory commands by itself, so the host need not
// know the data-dependent flow. It keeps the address registers and a small
// control FSM:
//  * project, bitmask input: for every 8-tuple column of the attribute whose
//    bitmask byte (from vector register A) is non-zero, one read carrying the
//    byte as lane select; columns with no selected tuple are skipped;
//  * project, OID input: one read per OID in vector register A, at column
//    (OID - initial OID)/8, selecting lane (OID - initial OID) mod 8;
//  * join: reads the R keys/OIDs and S keys/OIDs (four key columns followed
//    by four OID columns at each input address), then lets the join unit
//    merge;
//  * both: whenever the output FIFO holds a full 256 bytes, and at the end,
//    one write per 32-byte entry, interleaved over the four banks starting at
//    the output bank (entry k: bank out_bank+k, column out_col+k/4).
// Reads are only issued while the FIFO is sure to have room for their output.
// project_done/join_done rise when all output has been written and stay high
// until the next start. Commands leave on cmd_valid/cmd_ready.
// The bank interleaving, the 256-byte write batches and the rate follow the
// paper; the column layouts and the credit rule are this design's own.
module pim_cmd_generator
  import darwin_pkg::*;
#(
  parameter int FIFO_DEPTH = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              join_mode,
  input  logic              oid_mode,
  input  logic [BANK_W-1:0] in_bank,
  input  logic [ROW_W-1:0]  in_row,
  input  logic [COL_W-1:0]  in_col,
  input  elem_t             in_oid,
  input  logic [BANK_W-1:0] out_bank,
  input  logic [ROW_W-1:0]  out_row,
  input  logic [COL_W-1:0]  out_col,
  input  logic [BANK_W-1:0] b2_bank,
  input  logic [ROW_W-1:0]  b2_row,
  input  logic [COL_W-1:0]  b2_col,
  input  logic [31:0]       tuples,
  input  word_t [REG_SLOTS-1:0] vec_a,
  input  logic              rd_done,
  input  logic              wr_done,
  input  logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_count,
  input  logic              merge_done,
  output logic              cmd_valid,
  output pim_cmd_t          cmd,
  input  logic              cmd_ready,
  output logic              flush,
  output logic              join_go,
  output logic              busy,
  output logic              project_done,
  output logic              join_done
);

  localparam int CW = $clog2(FIFO_DEPTH+1);

  typedef enum logic [2:0] {
    S_IDLE, S_PRD, S_JLD, S_WAIT, S_MERGE, S_FLUSH, S_SETTLE, S_DRAIN
  } state_e;

  state_e      state;
  logic        jmode;
  logic [9:0]  j;
  logic [6:0]  outstanding;
  logic [CW-1:0] wr_out;
  logic [9:0]  wr_idx;

  logic [BITMASK_W-1:0] bm;
  elem_t [VEC_WORDS-1:0] oids;
  assign bm   = vec_a[1:0];
  assign oids = vec_a;

  function automatic logic [ROW_W+COL_W-1:0] lin(input logic [ROW_W-1:0] r,
                                                 input logic [COL_W-1:0] c,
                                                 input logic [10:0] off);
    lin = {r, c} + (ROW_W+COL_W)'(off);
  endfunction

  // ---- next project read
  logic [9:0]  p_limit;
  logic [7:0]  p_mask;
  logic [10:0] p_off;
  always_comb begin
    elem_t rel;
    p_mask = '0;
    p_off  = '0;
    rel    = '0;
    if (oid_mode) begin
      p_limit = (tuples > 32) ? 10'd32 : tuples[9:0];
      rel     = oids[j[4:0]] - in_oid;
      p_off   = rel[13:3];
      p_mask  = 8'(1) << rel[2:0];
    end else begin
      p_limit = (tuples > 512) ? 10'd64 : 10'((tuples[9:0] + 10'd7) >> 3);
      p_off   = {1'b0, j};
      for (int l = 0; l < 8; l++)
        p_mask[l] = bm[{j[5:0], 3'(l)}] && ({j, 3'(l)} < 13'(tuples[12:0]) || tuples > 512);
    end
  end

  // ---- next join load
  logic [1:0] jg, js;
  logic       j_valid;
  logic [5:0] nr, ns;
  assign nr = tuples[5:0];
  assign ns = tuples[21:16];
  assign jg = j[3:2];
  assign js = j[1:0];
  assign j_valid = ({2'b00, js, 3'b000} < ((jg < 2) ? {1'b0, nr} : {1'b0, ns}));

  // ---- write trigger
  logic [CW-1:0] avail;
  logic          want_wr, rd_room;
  assign avail   = fifo_count - wr_out;
  // a full FIFO starts a burst of FIFO_DEPTH writes (256 bytes)
  logic [CW-1:0] burst;
  assign want_wr = (burst != '0) || (avail == CW'(FIFO_DEPTH)) || (state == S_DRAIN && avail != '0);
  // a read's output reaches the FIFO one cycle after its data (rd_done_q)
  logic rd_done_q;
  assign rd_room = (32'(fifo_count) + 32'(outstanding) + 32'(rd_done_q) + 1) <= FIFO_DEPTH;

  always_comb begin
    logic [ROW_W+COL_W-1:0] a;
    cmd       = '0;
    cmd.route = RT_PROJ;
    cmd.bop   = BOP_NOP;
    cmd_valid = 1'b0;
    a         = '0;
    if (want_wr) begin
      a         = lin(out_row, out_col, {3'b0, wr_idx[9:2]});
      cmd.typ   = CMD_WR;
      cmd.bank  = out_bank + wr_idx[1:0];
      cmd_valid = 1'b1;
    end else if (state == S_PRD && j < p_limit && p_mask != '0 && rd_room) begin
      a         = lin(in_row, in_col, p_off);
      cmd.typ   = CMD_RD;
      cmd.bank  = in_bank;
      cmd.aux   = p_mask;
      cmd_valid = 1'b1;
    end else if (state == S_JLD && j < 10'd16 && j_valid) begin
      if (jg < 2) a = lin(in_row, in_col, {8'd0, jg[0], js});
      else        a = lin(b2_row, b2_col, {8'd0, jg[0], js});
      cmd.typ   = CMD_RD;
      cmd.bank  = (jg < 2) ? in_bank : b2_bank;
      cmd.route = RT_JOIN;
      cmd.idx   = {2'b00, jg, js};
      cmd_valid = 1'b1;
    end
    cmd.row = a[ROW_W+COL_W-1:COL_W];
    cmd.col = a[COL_W-1:0];
  end

  logic issue_rd, issue_wr;
  assign issue_wr = cmd_valid && cmd_ready && cmd.typ == CMD_WR;
  assign issue_rd = cmd_valid && cmd_ready && cmd.typ == CMD_RD;

  assign flush = (state == S_FLUSH) && (fifo_count < CW'(FIFO_DEPTH));
  assign busy  = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; jmode <= 1'b0; j <= '0;
      outstanding <= '0; wr_out <= '0; wr_idx <= '0; rd_done_q <= 1'b0; burst <= '0;
      join_go <= 1'b0; project_done <= 1'b0; join_done <= 1'b0;
    end else begin
      join_go     <= 1'b0;
      rd_done_q   <= rd_done;
      outstanding <= outstanding + 7'(issue_rd) - 7'(rd_done);
      wr_out      <= wr_out + CW'(issue_wr) - CW'(wr_done);
      if (issue_wr) wr_idx <= wr_idx + 1'b1;
      if (issue_wr) begin
        if (burst != '0)                     burst <= burst - 1'b1;
        else if (avail == CW'(FIFO_DEPTH))   burst <= CW'(FIFO_DEPTH - 1);
      end
      unique case (state)
        S_IDLE: if (start) begin
          jmode        <= join_mode;
          j            <= '0;
          wr_idx       <= '0;
          project_done <= 1'b0;
          join_done    <= 1'b0;
          state        <= join_mode ? S_JLD : S_PRD;
        end
        S_PRD: begin
          if (j >= p_limit) state <= S_WAIT;
          else if (!want_wr && (p_mask == '0 || issue_rd)) j <= j + 1'b1;
        end
        S_JLD: begin
          if (j >= 10'd16) state <= S_WAIT;
          else if (!want_wr && (!j_valid || issue_rd)) j <= j + 1'b1;
        end
        S_WAIT: if (outstanding == '0 && !rd_done) begin
          if (jmode) begin
            join_go <= 1'b1;
            state   <= S_MERGE;
          end else begin
            state <= S_FLUSH;
          end
        end
        S_MERGE: if (merge_done && !join_go) state <= S_FLUSH;
        S_FLUSH: if (flush) state <= S_SETTLE;
        S_SETTLE: state <= S_DRAIN;
        S_DRAIN: if (fifo_count == '0 && wr_out == '0) begin
          state <= S_IDLE;
          if (jmode) join_done <= 1'b1;
          else       project_done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

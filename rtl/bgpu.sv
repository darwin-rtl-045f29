// bgpu: bank group processing unit, one per bank group.
//
// Runs the irregular, condition-dependent operators (project and the merge
// phase of join) on the data of the four banks of its group. It holds the
// data analytical engine (vector registers A and B of 32 x 4 bytes, the
// project unit, the join unit and an 8 x 32-byte output FIFO) and the PIM
// command generator, which produces the group's read and write commands
// during a project or join. Setup instructions load the address registers:
// SETUP_IN (input bank/row/column, immediate = initial OID), SETUP_OUT
// (output bank/row/column), SETUP_NUM (second input address, immediate =
// tuple count, or R count in bits 5:0 and S count in bits 21:16 for a join);
// START runs a project (immediate bit 0 = 0, bit 1 selects an OID list
// instead of a bitmask in vector register A) or a join (bit 0 = 1).
//
// cmd/cmd_valid is the group's issued command, delayed to line up with the
// bank data: reads deliver rdata in that cycle and writes take wdata from it.
// Data-movement commands with route RT_VEC move 32-byte slots between a bank
// and the vector registers (index bit 2 selects B, bits 1:0 the slot).
// The structure follows the paper's BGPU; encodings are this design's own.
module bgpu
  import darwin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  input  bgpu_inst_t  cfg,
  input  logic        cmd_valid,
  input  pim_cmd_t    cmd,
  input  word_t       rdata,
  output word_t       wdata,
  output logic        gen_valid,
  output pim_cmd_t    gen_cmd,
  input  logic        gen_ready,
  output logic        busy,
  output logic        project_done,
  output logic        join_done,
  output logic [15:0] out_count
);

  localparam int FD = 8;

  word_t [REG_SLOTS-1:0] vec_a, vec_b;

  // configuration (address) registers
  logic [BANK_W-1:0] in_bank, out_bank, b2_bank;
  logic [ROW_W-1:0]  in_row, out_row, b2_row;
  logic [COL_W-1:0]  in_col, out_col, b2_col;
  elem_t             in_oid;
  logic [31:0]       tuples;
  logic              start, join_mode, oid_mode;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_bank <= '0; out_bank <= '0; b2_bank <= '0;
      in_row  <= '0; out_row  <= '0; b2_row  <= '0;
      in_col  <= '0; out_col  <= '0; b2_col  <= '0;
      in_oid  <= '0; tuples   <= '0;
      start   <= 1'b0; join_mode <= 1'b0; oid_mode <= 1'b0;
    end else begin
      start <= 1'b0;
      if (cfg_valid) begin
        unique case (bgpu_op_e'(cfg.op))
          GOP_SETUP_IN:  begin in_bank  <= cfg.bank; in_row  <= cfg.row; in_col  <= cfg.col; in_oid <= cfg.imm; end
          GOP_SETUP_OUT: begin out_bank <= cfg.bank; out_row <= cfg.row; out_col <= cfg.col; end
          GOP_SETUP_NUM: begin b2_bank  <= cfg.bank; b2_row  <= cfg.row; b2_col  <= cfg.col; tuples <= cfg.imm; end
          GOP_START:     begin start <= 1'b1; join_mode <= cfg.imm[0]; oid_mode <= cfg.imm[1]; end
          default: ;
        endcase
      end
    end
  end

  // ---- decode of the aligned command
  logic rd, wr;
  assign rd = cmd_valid && cmd.typ == CMD_RD;
  assign wr = cmd_valid && cmd.typ == CMD_WR;

  logic proj_in, join_in, fifo_pop;
  assign proj_in  = rd && cmd.route == RT_PROJ;
  assign join_in  = rd && cmd.route == RT_JOIN;
  assign fifo_pop = wr && cmd.route == RT_PROJ;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vec_a <= '0;
      vec_b <= '0;
    end else begin
      if (rd && cmd.route == RT_VEC) begin
        if (cmd.idx[2]) vec_b[cmd.idx[1:0]] <= rdata;
        else            vec_a[cmd.idx[1:0]] <= rdata;
      end
      if (proj_in) vec_b[cmd.col[1:0]] <= rdata;
      if (join_in && cmd.idx[3:2] == 2'd0) vec_a[cmd.idx[1:0]] <= rdata;
      if (join_in && cmd.idx[3:2] == 2'd2) vec_b[cmd.idx[1:0]] <= rdata;
    end
  end

  // ---- project unit, join unit, output FIFO
  logic        p_push, j_push, flush, join_go, merge_done;
  word_t       p_data, j_data, fifo_head;
  logic [15:0] p_n, j_n;
  logic        fifo_full, fifo_empty;
  logic [$clog2(FD+1)-1:0] fifo_count;

  // the join unit's push is registered: leave room for one in flight
  logic j_room;
  assign j_room = (32'(fifo_count) + 32'(j_push)) < FD;

  project_unit u_project (
    .clk(clk), .rst_n(rst_n), .clear(start),
    .in_valid(proj_in), .in_data(rdata), .in_sel(cmd.aux),
    .flush(flush && !join_mode),
    .push(p_push), .push_data(p_data), .n_out(p_n)
  );

  join_unit u_join (
    .clk(clk), .rst_n(rst_n), .clear(start),
    .keys_r(vec_a), .keys_s(vec_b),
    .oid_load(join_in && cmd.idx[2]), .oid_sel_s(cmd.idx[3]), .oid_slot(cmd.idx[1:0]), .oid_data(rdata),
    .start(join_go), .n_r(tuples[5:0]), .n_s(tuples[21:16]),
    .out_ready(j_room), .flush(flush && join_mode),
    .push(j_push), .push_data(j_data), .done(merge_done), .n_pairs(j_n)
  );

  sync_fifo #(.T(word_t), .DEPTH(FD)) u_out_fifo (
    .clk(clk), .rst_n(rst_n),
    .push(p_push || j_push), .wdata(p_push ? p_data : j_data),
    .pop(fifo_pop), .rdata(fifo_head),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  pim_cmd_generator #(.FIFO_DEPTH(FD)) u_gen (
    .clk(clk), .rst_n(rst_n),
    .start(start), .join_mode(join_mode), .oid_mode(oid_mode),
    .in_bank(in_bank), .in_row(in_row), .in_col(in_col), .in_oid(in_oid),
    .out_bank(out_bank), .out_row(out_row), .out_col(out_col),
    .b2_bank(b2_bank), .b2_row(b2_row), .b2_col(b2_col),
    .tuples(tuples), .vec_a(vec_a),
    .rd_done(proj_in || join_in), .wr_done(fifo_pop),
    .fifo_count(fifo_count), .merge_done(merge_done),
    .cmd_valid(gen_valid), .cmd(gen_cmd), .cmd_ready(gen_ready),
    .flush(flush), .join_go(join_go),
    .busy(busy), .project_done(project_done), .join_done(join_done)
  );

  assign out_count = join_mode ? j_n : p_n;

  always_comb begin
    wdata = '0;
    if (fifo_pop) wdata = fifo_head;
    else if (wr && cmd.route == RT_VEC) wdata = cmd.idx[2] ? vec_b[cmd.idx[1:0]] : vec_a[cmd.idx[1:0]];
  end

  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n) fifo_pop |-> !fifo_empty);

endmodule

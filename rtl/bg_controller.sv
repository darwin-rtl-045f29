// bg_controller: the bank group controller.
//
// Every instruction sent to a chip reaches all of its bank-group controllers;
// each keeps only those whose thread ID equals its bank-group ID, buffers
// them and feeds them to its instruction decoder. The decoded PIM commands
// and the commands of the group's PIM command generator share one command
// queue (generator first); the chip's command scheduler looks at the queue
// head and pops it with 'issuable'.
// Ordering rules (this design's own): while the BGPU runs a project or join
// no instruction is decoded; a BGPU setup/start instruction is only decoded
// once all earlier commands have been executed (queue empty and pipe_idle),
// and the next instruction waits a few cycles after it, so that a START sees
// the registers the preceding moves filled. inst_space tells the host-side
// handshake that two more instructions (one CIMT's share) fit.
module bg_controller
  import darwin_pkg::*;
#(
  parameter int QDEPTH  = 16,
  parameter int IQDEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ID_W-1:0] bg_id,
  input  logic            inst_valid,
  input  logic [63:0]     inst,
  output logic            inst_space,
  input  logic            pipe_idle,
  input  logic            bgpu_busy,
  output logic            cfg_valid,
  output bgpu_inst_t      cfg,
  input  logic            gen_valid,
  input  pim_cmd_t        gen_cmd,
  output logic            gen_ready,
  output logic            head_valid,
  output pim_cmd_t        head,
  input  logic            issuable,
  output logic            idle
);

  // ---- instruction buffer with ID compare
  logic        accept, if_empty, if_full, if_pop;
  logic [63:0] if_head;
  logic [$clog2(IQDEPTH+1)-1:0] if_count;

  assign accept = inst_valid && (inst[63:58] == bg_id);

  sync_fifo #(.T(logic [63:0]), .DEPTH(IQDEPTH)) u_ififo (
    .clk(clk), .rst_n(rst_n), .push(accept), .wdata(inst), .pop(if_pop),
    .rdata(if_head), .full(if_full), .empty(if_empty), .count(if_count)
  );

  assign inst_space = (32'(if_count) + 2) <= IQDEPTH;

  // ---- decoder
  logic     dec_in_valid, dec_ready, dec_cmd_valid, dec_cmd_ready;
  pim_cmd_t dec_cmd;
  logic     q_full, q_empty;
  logic [1:0] cool;

  assign dec_in_valid = !if_empty && !bgpu_busy && cool == '0 &&
                        (if_head[57:56] != CAT_BGPU || (q_empty && pipe_idle));
  assign if_pop = dec_in_valid && dec_ready;

  pim_inst_decoder u_dec (
    .clk(clk), .rst_n(rst_n),
    .inst_valid(dec_in_valid), .inst(if_head), .inst_ready(dec_ready),
    .cmd_valid(dec_cmd_valid), .cmd(dec_cmd), .cmd_ready(dec_cmd_ready),
    .cfg_valid(cfg_valid), .cfg(cfg)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cool <= '0;
    else if (if_pop && if_head[57:56] == CAT_BGPU) cool <= 2'd3;
    else if (cool != '0) cool <= cool - 1'b1;
  end

  // ---- command queue
  logic     q_push;
  pim_cmd_t q_wdata;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  assign gen_ready     = !q_full;
  assign dec_cmd_ready = !q_full && !gen_valid;
  assign q_push        = (gen_valid || dec_cmd_valid) && !q_full;
  assign q_wdata       = gen_valid ? gen_cmd : dec_cmd;

  sync_fifo #(.T(pim_cmd_t), .DEPTH(QDEPTH)) u_cqueue (
    .clk(clk), .rst_n(rst_n), .push(q_push), .wdata(q_wdata),
    .pop(issuable && !q_empty), .rdata(head),
    .full(q_full), .empty(q_empty), .count(q_count)
  );

  assign head_valid = !q_empty;
  assign idle       = if_empty && dec_ready && q_empty && cool == '0;

endmodule

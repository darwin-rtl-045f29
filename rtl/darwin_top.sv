// darwin_top: one rank of the Darwin processing-in-memory memory module.
//
// The rank is the buffer chip (rank_buffer) and NUM_CHIPS DRAM dies
// (darwin_chip), each with NUM_BG bank groups of NUM_BANKS banks. The host
// sends concatenated instructions as 64-byte writes, eight 64-bit beats on
// dq/dq_valid, and must wait for ready before starting the next one: this
// is the handshake that lets bank groups run data-dependent work on their
// own. Thread ID of chip c, group g is c*NUM_BG + g.
//
// The DRAM cell arrays are not part of this RTL: every bank appears as a port
// triple, bank_cmd (activate, precharge, read, write with row and column),
// bank_wdata (sampled by the array RL cycles after a write command) and
// bank_rdata (returned RL cycles after a read), numbered
// (chip*NUM_BG + group)*NUM_BANKS + bank. The rank buffer's contents can be
// read out on host_rd_*. project_done/join_done/out_count report each bank
// group's last irregular operator (bank-group index chip*NUM_BG + group).
module darwin_top
  import darwin_pkg::*;
#(
  parameter int NUM_CHIPS = 4,
  parameter int NUM_BG    = 4,
  parameter int NUM_BANKS = 4,
  parameter int RB_DEPTH  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        dq_valid,
  input  logic [63:0] dq,
  output logic        ready,
  input  logic        host_rd_req,
  input  logic [5:0]  host_rd_idx,
  output logic        host_rd_valid,
  output logic [63:0] host_rd_beat,
  output dram_cmd_t   bank_cmd   [NUM_CHIPS*NUM_BG*NUM_BANKS],
  output word_t       bank_wdata [NUM_CHIPS*NUM_BG*NUM_BANKS],
  input  word_t       bank_rdata [NUM_CHIPS*NUM_BG*NUM_BANKS],
  output logic [NUM_CHIPS*NUM_BG-1:0] project_done,
  output logic [NUM_CHIPS*NUM_BG-1:0] join_done,
  output logic [15:0] out_count [NUM_CHIPS*NUM_BG]
);

  localparam int BPC = NUM_BG * NUM_BANKS;

  logic [NUM_CHIPS-1:0] inst_valid, chip_ready, rb_wr_en;
  logic [63:0]          inst [NUM_CHIPS];
  logic [5:0]           rb_wr_idx [NUM_CHIPS];
  logic [5:0]           rb_rd_idx [NUM_CHIPS];
  logic [7:0]           rb_rd_pidx [NUM_CHIPS];
  word_t                rb_wr_data [NUM_CHIPS];
  word_t                rb_rd_data [NUM_CHIPS];

  rank_buffer #(.NUM_CHIPS(NUM_CHIPS), .DEPTH(RB_DEPTH)) u_rank_buffer (
    .clk(clk), .rst_n(rst_n), .dq_valid(dq_valid), .dq(dq),
    .inst_valid(inst_valid), .inst(inst),
    .chip_wr_en(rb_wr_en), .chip_wr_idx(rb_wr_idx), .chip_wr_data(rb_wr_data),
    .chip_rd_idx(rb_rd_idx), .chip_rd_pidx(rb_rd_pidx), .chip_rd_data(rb_rd_data),
    .host_rd_req(host_rd_req), .host_rd_idx(host_rd_idx),
    .host_rd_valid(host_rd_valid), .host_rd_beat(host_rd_beat)
  );

  for (genvar c = 0; c < NUM_CHIPS; c++) begin : g_chip
    dram_cmd_t   cmd_c   [BPC];
    word_t       wdata_c [BPC];
    word_t       rdata_c [BPC];
    logic [15:0] cnt_c   [NUM_BG];

    for (genvar k = 0; k < BPC; k++) begin : g_port
      assign bank_cmd[c*BPC + k]   = cmd_c[k];
      assign bank_wdata[c*BPC + k] = wdata_c[k];
      assign rdata_c[k]            = bank_rdata[c*BPC + k];
    end
    for (genvar g = 0; g < NUM_BG; g++) begin : g_cnt
      assign out_count[c*NUM_BG + g] = cnt_c[g];
    end

    darwin_chip #(.NUM_BG(NUM_BG), .NUM_BANKS(NUM_BANKS)) u_chip (
      .clk(clk), .rst_n(rst_n), .id_base(ID_W'(c * NUM_BG)),
      .inst_valid(inst_valid[c]), .inst(inst[c]), .ready(chip_ready[c]),
      .bank_cmd(cmd_c), .bank_wdata(wdata_c), .bank_rdata(rdata_c),
      .rb_wr_en(rb_wr_en[c]), .rb_wr_idx(rb_wr_idx[c]), .rb_wr_data(rb_wr_data[c]),
      .rb_rd_idx(rb_rd_idx[c]), .rb_rd_pidx(rb_rd_pidx[c]), .rb_rd_data(rb_rd_data[c]),
      .project_done(project_done[c*NUM_BG +: NUM_BG]),
      .join_done(join_done[c*NUM_BG +: NUM_BG]),
      .out_count(cnt_c)
    );
  end

  assign ready = &chip_ready;

endmodule

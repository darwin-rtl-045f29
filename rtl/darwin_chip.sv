// darwin_chip: the processing-in-memory logic of one DRAM die.
//
// The die has NUM_BG bank groups of NUM_BANKS banks. Each bank has a bank
// processing unit (BPU); each bank group has a bank-group controller and a
// bank-group processing unit (BGPU); one PIM command scheduler serves the
// whole die, and a chip buffer carries data between bank groups. All
// instructions for this die arrive on inst/inst_valid and are offered to
// every bank group, which keeps those carrying its thread ID
// (id_base + group number).
//
// Timing: a command issued to the banks in cycle t is handed to the
// processing units in cycle t+RL_P, which is when the bank model returns read
// data and samples write data. The bank arrays themselves are outside this
// module: bank_cmd, bank_wdata and bank_rdata are the ports of the cell
// arrays, numbered group*NUM_BANKS + bank. Data-movement commands routed to
// the rank buffer use the rb_* ports. ready is high when every bank group can
// take two more instructions and no BGPU is busy: the host waits for it
// before sending the next concatenated instruction.
// The hierarchy follows the paper; the latency alignment and chip-buffer
// priority (lowest group wins if two write it in one cycle) are this
// design's own.
module darwin_chip
  import darwin_pkg::*;
#(
  parameter int NUM_BG    = 4,
  parameter int NUM_BANKS = 4,
  parameter int RL_P      = RL,
  parameter int CB_DEPTH  = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [ID_W-1:0] id_base,
  input  logic            inst_valid,
  input  logic [63:0]     inst,
  output logic            ready,
  output dram_cmd_t       bank_cmd   [NUM_BG*NUM_BANKS],
  output word_t           bank_wdata [NUM_BG*NUM_BANKS],
  input  word_t           bank_rdata [NUM_BG*NUM_BANKS],
  output logic            rb_wr_en,
  output logic [5:0]      rb_wr_idx,
  output word_t           rb_wr_data,
  output logic [5:0]      rb_rd_idx,
  output logic [7:0]      rb_rd_pidx,
  input  word_t           rb_rd_data,
  output logic [NUM_BG-1:0] project_done,
  output logic [NUM_BG-1:0] join_done,
  output logic [15:0]     out_count [NUM_BG]
);

  logic [NUM_BG-1:0] bg_idle, head_valid, issuable, space, bgpu_busy, pipe_idle, gen_valid, gen_ready, cfg_valid;
  pim_cmd_t          head [NUM_BG];
  pim_cmd_t          gen_cmd [NUM_BG];
  bgpu_inst_t        cfg [NUM_BG];
  dram_cmd_t         sched_cmd [NUM_BG][NUM_BANKS];

  // aligned (delayed) command per bank group
  logic              dvalid [NUM_BG];
  pim_cmd_t          dcmd   [NUM_BG];
  word_t             bg_wdata [NUM_BG];
  word_t             bpu_wdata [NUM_BG*NUM_BANKS];

  word_t chip_buf [CB_DEPTH];

  pim_cmd_scheduler #(.NUM_BG(NUM_BG), .NUM_BANKS(NUM_BANKS)) u_sched (
    .clk(clk), .rst_n(rst_n), .head_valid(head_valid), .head(head),
    .issuable(issuable), .bank_cmd(sched_cmd)
  );

  for (genvar g = 0; g < NUM_BG; g++) begin : g_bg
    logic     pv [RL_P];
    pim_cmd_t pc [RL_P];
    logic     issue;
    word_t    grd;

    assign issue = issuable[g] && head_valid[g] &&
                   (head[g].typ == CMD_RD || head[g].typ == CMD_WR || head[g].typ == CMD_COMP);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int s = 0; s < RL_P; s++) begin
          pv[s] <= 1'b0;
          pc[s] <= '0;
        end
      end else begin
        pv[0] <= issue;
        pc[0] <= head[g];
        for (int s = 1; s < RL_P; s++) begin
          pv[s] <= pv[s-1];
          pc[s] <= pc[s-1];
        end
      end
    end

    assign dvalid[g] = pv[RL_P-1];
    assign dcmd[g]   = pc[RL_P-1];

    always_comb begin
      pipe_idle[g] = !issue;
      for (int s = 0; s < RL_P; s++) if (pv[s]) pipe_idle[g] = 1'b0;
    end

    bg_controller u_ctrl (
      .clk(clk), .rst_n(rst_n), .bg_id(id_base + ID_W'(g)),
      .inst_valid(inst_valid), .inst(inst), .inst_space(space[g]),
      .pipe_idle(pipe_idle[g]), .bgpu_busy(bgpu_busy[g]),
      .cfg_valid(cfg_valid[g]), .cfg(cfg[g]),
      .gen_valid(gen_valid[g]), .gen_cmd(gen_cmd[g]), .gen_ready(gen_ready[g]),
      .head_valid(head_valid[g]), .head(head[g]), .issuable(issuable[g]),
      .idle(bg_idle[g])
    );

    assign grd = bank_rdata[g*NUM_BANKS + int'(dcmd[g].bank)];

    bgpu u_bgpu (
      .clk(clk), .rst_n(rst_n),
      .cfg_valid(cfg_valid[g]), .cfg(cfg[g]),
      .cmd_valid(dvalid[g] && !dcmd[g].all_banks), .cmd(dcmd[g]),
      .rdata(grd), .wdata(bg_wdata[g]),
      .gen_valid(gen_valid[g]), .gen_cmd(gen_cmd[g]), .gen_ready(gen_ready[g]),
      .busy(bgpu_busy[g]), .project_done(project_done[g]), .join_done(join_done[g]),
      .out_count(out_count[g])
    );

    for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
      bpu u_bpu (
        .clk(clk), .rst_n(rst_n),
        .cmd_valid(dvalid[g] && dcmd[g].all_banks), .cmd(dcmd[g]),
        .rdata(bank_rdata[g*NUM_BANKS + b]), .wdata(bpu_wdata[g*NUM_BANKS + b])
      );

      assign bank_cmd[g*NUM_BANKS + b] = sched_cmd[g][b];

      always_comb begin
        bank_wdata[g*NUM_BANKS + b] = '0;
        if (dvalid[g] && dcmd[g].typ == CMD_WR) begin
          if (dcmd[g].all_banks)
            bank_wdata[g*NUM_BANKS + b] = bpu_wdata[g*NUM_BANKS + b];
          else if (int'(dcmd[g].bank) == b) begin
            unique case (dcmd[g].route)
              RT_CHIPBUF: bank_wdata[g*NUM_BANKS + b] = chip_buf[dcmd[g].idx[$clog2(CB_DEPTH)-1:0]];
              RT_RANKBUF: bank_wdata[g*NUM_BANKS + b] = rb_rd_data;
              default:    bank_wdata[g*NUM_BANKS + b] = bg_wdata[g];
            endcase
          end
        end
      end
    end
  end

  // ---- chip buffer and rank-buffer port
  always_ff @(posedge clk) begin
    for (int g = NUM_BG - 1; g >= 0; g--) begin
      if (dvalid[g] && dcmd[g].typ == CMD_RD && dcmd[g].route == RT_CHIPBUF && !dcmd[g].all_banks)
        chip_buf[dcmd[g].idx[$clog2(CB_DEPTH)-1:0]] <= bank_rdata[g*NUM_BANKS + int'(dcmd[g].bank)];
    end
  end

  always_comb begin
    rb_wr_en   = 1'b0;
    rb_wr_idx  = '0;
    rb_wr_data = '0;
    rb_rd_idx  = '0;
    rb_rd_pidx = '0;
    for (int g = NUM_BG - 1; g >= 0; g--) begin
      if (dvalid[g] && dcmd[g].typ == CMD_RD && dcmd[g].route == RT_RANKBUF && !dcmd[g].all_banks) begin
        rb_wr_en   = 1'b1;
        rb_wr_idx  = dcmd[g].idx;
        rb_wr_data = bank_rdata[g*NUM_BANKS + int'(dcmd[g].bank)];
      end
      if (dvalid[g] && dcmd[g].typ == CMD_WR && dcmd[g].route == RT_RANKBUF && !dcmd[g].all_banks) begin
        rb_rd_idx  = dcmd[g].idx;
        rb_rd_pidx = dcmd[g].aux;
      end
    end
  end

  assign ready = (&space) && !(|bgpu_busy);

endmodule

// pim_inst_decoder: the instruction decoder of a bank-group controller.
//
// Turns one 64-bit PIM instruction into a sequence of PIM commands, one per
// cycle. A BPU instruction yields nCMD commands (0 to 64) addressed to all
// banks of the group; command k uses the first and second column addresses
// plus k times step1 and step2 (signed, modulo 64), with row and bank fixed,
// as the paper's example (0,0),(1,2),(2,4),(3,6) shows. An operand in memory
// makes the command a read, a STORE makes it a write, anything else is a
// register-only compute command. A data-movement MOVE yields nCMD reads (from
// memory into the BGPU, the chip buffer or the rank buffer) or writes (the
// other way) to one bank, with the register/buffer index advancing by one; an
// ACTIVATE yields one row-open command; NO OP yields nothing. BGPU setup and
// start instructions are handed out whole on cfg_valid for one cycle.
// Field positions follow the published format; the opcode category split and
// operation encodings are this design's own.
//
// Handshake: inst is taken when inst_valid and inst_ready; commands leave on
// cmd_valid/cmd_ready.
module pim_inst_decoder
  import darwin_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  input  logic [63:0] inst,
  output logic        inst_ready,
  output logic        cmd_valid,
  output pim_cmd_t    cmd,
  input  logic        cmd_ready,
  output logic        cfg_valid,
  output bgpu_inst_t  cfg
);

  logic              busy;
  logic [63:0]       cur;
  logic [NCMD_W-1:0] k, n;

  bpu_inst_t  bi, in_b;
  move_inst_t mi, in_m;
  assign bi   = bpu_inst_t'(cur);
  assign mi   = move_inst_t'(cur);
  assign in_b = bpu_inst_t'(inst);
  assign in_m = move_inst_t'(inst);

  assign inst_ready = !busy;

  function automatic logic [COL_W-1:0] offs(input logic [COL_W-1:0] base,
                                            input logic [NCMD_W-1:0] kk,
                                            input logic [STEP_W-1:0] step);
    logic signed [12:0] prod;
    prod = $signed({1'b0, kk}) * $signed(step);
    offs = base + prod[COL_W-1:0];
  endfunction

  function automatic route_e loc_route(input logic [2:0] loc);
    unique case (loc)
      MLOC_BGPU:    loc_route = RT_VEC;
      MLOC_CHIPBUF: loc_route = RT_CHIPBUF;
      MLOC_RANKBUF: loc_route = RT_RANKBUF;
      default:      loc_route = RT_NONE;
    endcase
  endfunction

  always_comb begin
    cmd = '0;
    cmd.route = RT_NONE;
    cmd.bop   = BOP_NOP;
    if (cur[57:56] == CAT_BPU) begin
      cmd.all_banks = 1'b1;
      cmd.row   = bi.row;
      cmd.col   = offs(bi.col1, k, bi.step1);
      cmd.col2  = offs(bi.col2, k, bi.step2);
      cmd.route = RT_BPU;
      cmd.bop   = bpu_op_e'(bi.op);
      cmd.src   = bi.src;
      cmd.dst   = bi.dst;
      cmd.perm  = bi.perm;
      if (bpu_op_e'(bi.op) == BOP_STORE)  cmd.typ = CMD_WR;
      else if (bi.src == LOC_MEM)         cmd.typ = CMD_RD;
      else                                cmd.typ = CMD_COMP;
    end else begin
      cmd.bank = mi.bank;
      cmd.row  = mi.row;
      cmd.col  = offs(mi.col, k, mi.step1);
      cmd.idx  = mi.regidx + 6'(k);
      cmd.src  = mi.src;
      cmd.dst  = mi.dst;
      cmd.aux  = mi.pidx;
      if (mi.op == MOP_ACT) begin
        cmd.typ = CMD_ACT;
      end else if (mi.src == MLOC_MEM && mi.dst != MLOC_MEM) begin
        cmd.typ   = CMD_RD;
        cmd.route = loc_route(mi.dst);
      end else if (mi.dst == MLOC_MEM && mi.src != MLOC_MEM) begin
        cmd.typ   = CMD_WR;
        cmd.route = loc_route(mi.src);
      end else begin
        cmd.typ = CMD_NOP;
      end
    end
  end

  assign cmd_valid = busy && (cmd.typ != CMD_NOP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      cur       <= '0;
      k         <= '0;
      n         <= '0;
      cfg_valid <= 1'b0;
      cfg       <= '0;
    end else begin
      cfg_valid <= 1'b0;
      if (!busy) begin
        if (inst_valid) begin
          cur <= inst;
          k   <= '0;
          unique case (inst[57:56])
            CAT_BPU: begin
              n    <= in_b.ncmd;
              busy <= (in_b.ncmd != '0);
            end
            CAT_BGPU: begin
              cfg_valid <= 1'b1;
              cfg       <= bgpu_inst_t'(inst);
            end
            CAT_MOVE: begin
              if (in_m.op == MOP_ACT) begin
                n    <= NCMD_W'(1);
                busy <= 1'b1;
              end else if (in_m.op == MOP_MOVE) begin
                n    <= in_m.ncmd;
                busy <= (in_m.ncmd != '0);
              end
            end
            default: ;
          endcase
        end
      end else if (!cmd_valid || cmd_ready) begin
        k <= k + 1'b1;
        if (k + 1'b1 >= n) busy <= 1'b0;
      end
    end
  end

endmodule

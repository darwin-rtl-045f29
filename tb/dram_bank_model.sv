// dram_bank_model: behavioural model of one DRAM bank cell array, for
// simulation only (not synthesizable logic of the design).
//
// Stores ROWS rows of 64 columns of 256 bits; a row address is taken modulo
// ROWS, so a test must keep to ROWS distinct rows. It follows the command
// protocol seen at a bank's ports: ACT opens a row, PRE closes it, RD returns
// the addressed word on rdata exactly RLP cycles after the command, and WR
// stores wdata as sampled RLP cycles after the command. A column command to a
// closed bank or to another row than the open one is counted in 'errors'.
// n_act, n_rd and n_wr count commands for the testbenches. The bd_* ports
// are a test back door: a rising bd_we stores bd_wdata at row bd_row, column
// bd_col, and bd_rdata always shows the word there.
module dram_bank_model
  import darwin_pkg::*;
#(
  parameter int ROWS = 4,
  parameter int RLP  = RL
) (
  input  logic      clk,
  input  dram_cmd_t cmd,
  input  word_t     wdata,
  output word_t     rdata,
  input  logic      bd_we,
  input  int        bd_row,
  input  int        bd_col,
  input  word_t     bd_wdata,
  output word_t     bd_rdata
);

  word_t     mem [ROWS*64];
  dram_cmd_t st  [RLP];
  logic      is_open;
  logic [ROW_W-1:0] orow;
  int errors, n_act, n_pre, n_rd, n_wr;

  function automatic int addr(input logic [ROW_W-1:0] r, input logic [COL_W-1:0] c);
    return (int'(r) % ROWS) * 64 + int'(c);
  endfunction

  function automatic void poke(input int r, input int c, input word_t w);
    mem[(r % ROWS) * 64 + c] = w;
  endfunction

  function automatic word_t peek(input int r, input int c);
    return mem[(r % ROWS) * 64 + c];
  endfunction

  initial begin
    for (int i = 0; i < ROWS*64; i++) mem[i] = '0;
    for (int s = 0; s < RLP; s++) st[s] = '0;
    is_open = 1'b0;
    orow    = '0;
    errors  = 0; n_act = 0; n_pre = 0; n_rd = 0; n_wr = 0;
  end

  always @(posedge clk) begin
    st[0] <= cmd;
    for (int s = 1; s < RLP; s++) st[s] <= st[s-1];
    if (st[RLP-1].typ == CMD_WR) mem[addr(st[RLP-1].row, st[RLP-1].col)] <= wdata;
    unique case (cmd.typ)
      CMD_ACT: begin
        if (is_open) errors++;
        is_open <= 1'b1; orow <= cmd.row; n_act++;
      end
      CMD_PRE: begin is_open <= 1'b0; n_pre++; end
      CMD_RD, CMD_WR: begin
        if (!is_open || orow != cmd.row) errors++;
        if (cmd.typ == CMD_RD) n_rd++; else n_wr++;
      end
      default: ;
    endcase
  end

  always @(posedge bd_we) mem[(bd_row % ROWS) * 64 + bd_col] = bd_wdata;
  assign bd_rdata = mem[(bd_row % ROWS) * 64 + bd_col];

  assign rdata = (st[RLP-1].typ == CMD_RD) ? mem[addr(st[RLP-1].row, st[RLP-1].col)] : '0;

endmodule

// rank_buffer: PIM logic in the buffer chip of the load-reduced DIMM.
//
// Three jobs, all on the rank's 64-bit data pins:
//  * Concatenated instructions: a 64-byte write carrying eight 64-bit PIM
//    instructions arrives as eight 64-bit beats. Beat b, lane c (16 bits,
//    lane c on DQ[16c+15:16c]) holds slice 4b+c; instruction i is made of the
//    lane-(i mod 4) slices of beats 4(i/4) to 4(i/4)+3, high slice first.
//    The demultiplexer hands each chip its complete instruction on
//    inst_valid/inst the cycle after its fourth slice, so each chip gets two
//    instructions per write.
//  * Inter-chip data movement: words a chip reads out of a bank for the rank
//    buffer are stored at the index carried by the command (the lowest chip
//    wins if two write in one cycle); for a write into another chip the word
//    at chip_rd_idx is returned with its four 8-byte quarters re-ordered by
//    the 8-bit permute index (output quarter k = input quarter idx[2k+1:2k]).
//  * Host read-out: host_rd_req streams buffer words idx and idx+1 (64 bytes)
//    as sixteen 32-bit beats through the DQ aligner, which emits eight 64-bit
//    beats on host_rd_valid/host_rd_beat.
// The slice layout follows the paper's figure for four chips with 16 data
// pins each; lane order, buffer depth and permute granularity are this
// design's own.
module rank_buffer
  import darwin_pkg::*;
#(
  parameter int NUM_CHIPS = 4,
  parameter int DEPTH     = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 dq_valid,
  input  logic [63:0]          dq,
  output logic [NUM_CHIPS-1:0] inst_valid,
  output logic [63:0]          inst [NUM_CHIPS],
  input  logic [NUM_CHIPS-1:0] chip_wr_en,
  input  logic [5:0]           chip_wr_idx  [NUM_CHIPS],
  input  word_t                chip_wr_data [NUM_CHIPS],
  input  logic [5:0]           chip_rd_idx  [NUM_CHIPS],
  input  logic [7:0]           chip_rd_pidx [NUM_CHIPS],
  output word_t                chip_rd_data [NUM_CHIPS],
  input  logic                 host_rd_req,
  input  logic [5:0]           host_rd_idx,
  output logic                 host_rd_valid,
  output logic [63:0]          host_rd_beat
);

  localparam int LW  = 64 / NUM_CHIPS;     // data pins per chip
  localparam int SPI = 64 / LW;            // slices per instruction
  localparam int AW  = $clog2(DEPTH);

  // ---- CIMT demultiplexer
  logic [2:0]  beat;
  logic [63:0] sr [NUM_CHIPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat       <= '0;
      inst_valid <= '0;
      for (int c = 0; c < NUM_CHIPS; c++) begin
        sr[c]   <= '0;
        inst[c] <= '0;
      end
    end else begin
      inst_valid <= '0;
      if (dq_valid) begin
        beat <= beat + 1'b1;
        for (int c = 0; c < NUM_CHIPS; c++) begin
          sr[c] <= {sr[c][63-LW:0], dq[c*LW +: LW]};
          if ((32'(beat) % SPI) == SPI - 1) begin
            inst_valid[c] <= 1'b1;
            inst[c]       <= {sr[c][63-LW:0], dq[c*LW +: LW]};
          end
        end
      end
    end
  end

  // ---- buffer storage and inter-chip permute unit
  word_t buffer [DEPTH];

  always_ff @(posedge clk) begin
    for (int c = NUM_CHIPS - 1; c >= 0; c--)
      if (chip_wr_en[c]) buffer[chip_wr_idx[c][AW-1:0]] <= chip_wr_data[c];
  end

  always_comb begin
    for (int c = 0; c < NUM_CHIPS; c++) begin
      word_t w;
      w = buffer[chip_rd_idx[c][AW-1:0]];
      for (int q = 0; q < 4; q++)
        chip_rd_data[c][q*64 +: 64] = w[chip_rd_pidx[c][2*q +: 2]*64 +: 64];
    end
  end

  // ---- host read-out through the DQ aligner
  logic        streaming;
  logic [3:0]  hbeat;
  logic [AW-1:0] hidx;
  logic [511:0] pair;
  assign pair = {buffer[hidx + 1'b1], buffer[hidx]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      streaming <= 1'b0;
      hbeat     <= '0;
      hidx      <= '0;
    end else if (!streaming) begin
      if (host_rd_req) begin
        streaming <= 1'b1;
        hbeat     <= '0;
        hidx      <= host_rd_idx[AW-1:0];
      end
    end else begin
      hbeat <= hbeat + 1'b1;
      if (hbeat == 4'd15) streaming <= 1'b0;
    end
  end

  dq_aligner #(.IN_W(32), .OUT_W(64)) u_dq_aligner (
    .clk(clk), .rst_n(rst_n),
    .in_valid(streaming), .in_beat(pair[hbeat*32 +: 32]),
    .out_valid(host_rd_valid), .out_beat(host_rd_beat)
  );

endmodule

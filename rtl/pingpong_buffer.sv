// pingpong_buffer: Buffers 1 and 2, the ping-pong store between the Linear layers and Conv1D.
//
// The quantized outputs of one or two Linear layers are written into one bank while the Conv1D
// unit reads the other bank, so a new frame's matrix work overlaps the previous frame's
// convolution (the paper's ping-pong pair). Each bank keeps four channels:
//   channel = 2*slot + (row & 1)  (slot 0 = Linear layer 1, slot 1 = Linear layer 2)
//   word    = (row >> 1) * NBLK + column block, LANES INT8 values per word.
// With DFT-Net rows 2f / 2f+1 holding the real / imaginary part of symbol f, one read returns the
// four Conv1D inputs u1..u4 of Eq. (10) for LANES samples at once; for Demod-Net (row = frame)
// it returns both branches of frames 2p and 2p+1. This layout is this design's own choice.
//
// Interface: one write per cycle (wr_*), one read of all four channels per cycle (rd_*), read
// data valid one cycle after rd_en.
module pingpong_buffer
  import ddna_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned LANES = 16,
  parameter int unsigned NBLK  = 92   // column blocks per Linear layer (Dm/16 for 16-QAM)
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic                       wr_bank,
  input  logic                       wr_slot,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [$clog2(NBLK)-1:0]    wr_nblk,
  input  act_t                       wr_data [LANES],
  input  logic                       rd_en,
  input  logic                       rd_bank,
  input  logic [$clog2(ROWS)-2:0]    rd_pair,
  input  logic [$clog2(NBLK)-1:0]    rd_nblk,
  output act_t                       rd_data [4][LANES]
);

  localparam int unsigned DEPTH = (ROWS / 2) * NBLK;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned WW    = LANES * DW;

  logic [WW-1:0] wr_word;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [2:0]    wr_sel;
  logic [WW-1:0] rd_word [4];
  logic [WW-1:0] rd_q    [8];
  logic          rd_bank_q;

  always_comb begin
    for (int i = 0; i < LANES; i++) wr_word[i*DW +: DW] = wr_data[i];
    wr_addr = AW'(32'(wr_row >> 1) * NBLK + 32'(wr_nblk));
    rd_addr = AW'(32'(rd_pair) * NBLK + 32'(rd_nblk));
    wr_sel  = {wr_bank, wr_slot, wr_row[0]};
  end

  // eight simple dual-port memories, index = bank*4 + channel
  for (genvar m = 0; m < 8; m++) begin : g_mem
    logic [WW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wr_sel == 3'(m)) mem[wr_addr] <= wr_word;
    end
    always_ff @(posedge clk) begin
      if (rd_en) rd_q[m] <= mem[rd_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_bank_q <= rd_bank;
  end

  always_comb begin
    for (int ch = 0; ch < 4; ch++) rd_word[ch] = rd_q[{rd_bank_q, 2'(ch)}];
  end

  always_comb begin
    for (int ch = 0; ch < 4; ch++)
      for (int i = 0; i < LANES; i++) rd_data[ch][i] = act_t'(rd_word[ch][i*DW +: DW]);
  end

endmodule

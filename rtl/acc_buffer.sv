// acc_buffer: Buffer 4, the partial-sum store for block-decomposed matrix products.
//
// A large Linear layer is split along its inner dimension into basic blocks, each one PEA pass.
// For the first block of an output tile the PEA rows are stored here and nothing is passed on;
// for middle blocks the stored row is read, the new row added and the sum written back; for the
// last block the sum is passed on to quantization. A pass with the whole inner dimension
// (BLK_SINGLE) bypasses the store. The buffer holds one basic block: ROWS x LANES 32-bit sums,
// since the output tile is finished before the next one starts (the paper's schedule).
// Behaviour follows the paper; the row-indexed organisation and single-cycle latency are this
// design's own.
//
// Interface: in_valid / in_row / in_vec / in_kind; one cycle later out_valid / out_vec (only for
// BLK_SINGLE and BLK_LAST rows).
module acc_buffer
  import ddna_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned LANES = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [$clog2(ROWS)-1:0]  in_row,
  input  acc_t                     in_vec [LANES],
  input  blk_kind_e                in_kind,
  output logic                     out_valid,
  output acc_t                     out_vec [LANES]
);

  acc_t store [ROWS][LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) out_vec[i] <= '0;
      for (int r = 0; r < ROWS; r++)
        for (int i = 0; i < LANES; i++) store[r][i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        unique case (in_kind)
          BLK_SINGLE: begin
            out_valid <= 1'b1;
            for (int i = 0; i < LANES; i++) out_vec[i] <= in_vec[i];
          end
          BLK_FIRST:
            for (int i = 0; i < LANES; i++) store[in_row][i] <= in_vec[i];
          BLK_MID:
            for (int i = 0; i < LANES; i++) store[in_row][i] <= store[in_row][i] + in_vec[i];
          BLK_LAST: begin
            out_valid <= 1'b1;
            for (int i = 0; i < LANES; i++) out_vec[i] <= store[in_row][i] + in_vec[i];
          end
        endcase
      end
    end
  end

endmodule

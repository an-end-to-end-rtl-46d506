// pea: processing element array, an output-stationary systolic array of ROWS x COLS PEs.
//
// One "pass" multiplies a basic block A[ROWS x K] by W[K x COLS]. The caller presents, in each of
// K consecutive cycles, one column of A (a_row, one INT8 per array row) and one row of W (w_col,
// one INT8 per array column), with a_valid high and a_last high on the K-th. Passes may follow
// each other with no gap: thanks to the two result registers in every PE, the inputs of the next
// pass stream in while the previous results are read out (the paper's data-merge scheme).
//
// Inside, row r's activations are delayed r cycles and column c's weights c cycles (the usual
// input skew), so PE(r,c) sees A[r][k] and W[k][c] together. When column c has all its results
// in reg2, the column shifts them up and out of its top PE, one per cycle, row 0 first. A
// triangular delay line then realigns the columns, so the output is one row of COLS 32-bit sums
// per cycle: ROWS valid cycles per pass, out_row_idx counting 0..ROWS-1.
//
// Timing: with P back-to-back passes of depth K starting at cycle 0, the last PE loads its last
// result P*K + ROWS + COLS - 2 cycles after the first input; the rows of a pass leave the array
// from ROWS + COLS + K cycles after that pass's first input. Requirement: K >= 2*ROWS, so that
// a column's readout ends before its next results arrive (checked by an assertion in pe).
// PEA dimensions follow the paper (rows 2kF, columns 16); the readout chain and the delay-line
// deskew are this design's choices.
module pea
  import ddna_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  act_t a_row [ROWS],
  input  logic a_valid,
  input  logic a_last,
  input  act_t w_col [COLS],
  output logic out_valid,
  output logic [$clog2(ROWS)-1:0] out_row_idx,
  output acc_t out_vec [COLS],
  // high in every cycle any PE loads a finished result (for cycle accounting)
  output logic any_loaded
);

  localparam int unsigned RIW = $clog2(ROWS);

  // ---------------------------------------------------------------- input skew
  act_t a_skew [ROWS];
  logic v_skew [ROWS];
  logic l_skew [ROWS];
  act_t w_skew [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_askew
    if (r == 0) begin : g_r0
      assign a_skew[r] = a_row[r];
      assign v_skew[r] = a_valid;
      assign l_skew[r] = a_last;
    end else begin : g_rn
      act_t a_d [r];
      logic v_d [r];
      logic l_d [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            a_d[i] <= '0; v_d[i] <= 1'b0; l_d[i] <= 1'b0;
          end
        end else begin
          a_d[0] <= a_row[r]; v_d[0] <= a_valid; l_d[0] <= a_last;
          for (int i = 1; i < r; i++) begin
            a_d[i] <= a_d[i-1]; v_d[i] <= v_d[i-1]; l_d[i] <= l_d[i-1];
          end
        end
      end
      assign a_skew[r] = a_d[r-1];
      assign v_skew[r] = v_d[r-1];
      assign l_skew[r] = l_d[r-1];
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_wskew
    if (c == 0) begin : g_c0
      assign w_skew[c] = w_col[c];
    end else begin : g_cn
      act_t w_d [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < c; i++) w_d[i] <= '0;
        end else begin
          w_d[0] <= w_col[c];
          for (int i = 1; i < c; i++) w_d[i] <= w_d[i-1];
        end
      end
      assign w_skew[c] = w_d[c-1];
    end
  end

  // ---------------------------------------------------------------- the array
  act_t a_h   [ROWS][COLS+1];
  logic v_h   [ROWS][COLS+1];
  logic l_h   [ROWS][COLS+1];
  act_t w_v   [ROWS+1][COLS];
  acc_t rd_v  [ROWS+1][COLS];
  logic ld    [ROWS][COLS];
  logic shift [COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign a_h[r][0] = a_skew[r];
    assign v_h[r][0] = v_skew[r];
    assign l_h[r][0] = l_skew[r];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      if (r == 0) begin : g_top
        assign w_v[0][c] = w_skew[c];
      end
      pe u_pe (
        .clk        (clk),
        .rst_n      (rst_n),
        .a_in       (a_h[r][c]),
        .a_valid_in (v_h[r][c]),
        .a_last_in  (l_h[r][c]),
        .a_out      (a_h[r][c+1]),
        .a_valid_out(v_h[r][c+1]),
        .a_last_out (l_h[r][c+1]),
        .w_in       (w_v[r][c]),
        .w_out      (w_v[r+1][c]),
        .rd_shift   (shift[c]),
        .rd_in      (rd_v[r+1][c]),
        .rd_out     (rd_v[r][c]),
        .loaded     (ld[r][c])
      );
    end
  end

  for (genvar c = 0; c < COLS; c++) begin : g_bottom
    assign rd_v[ROWS][c] = '0;
  end

  // ---------------------------------------------------------------- per-column readout window
  logic [RIW:0] rd_cnt [COLS];
  logic         col_valid [COLS];
  logic [RIW-1:0] col_idx [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_rd
    // the bottom PE of the column loads last; its flag opens a ROWS-cycle shift window
    assign col_valid[c] = ld[ROWS-1][c] || (rd_cnt[c] != '0);
    assign shift[c]     = col_valid[c];
    assign col_idx[c]   = ld[ROWS-1][c] ? '0 : RIW'(ROWS - rd_cnt[c]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                 rd_cnt[c] <= '0;
      else if (ld[ROWS-1][c])     rd_cnt[c] <= (RIW+1)'(ROWS - 1);
      else if (rd_cnt[c] != '0)   rd_cnt[c] <= rd_cnt[c] - 1'b1;
    end
  end

  // ---------------------------------------------------------------- deskew: column c waits COLS-1-c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    localparam int unsigned DLY = COLS - 1 - c;
    if (DLY == 0) begin : g_nodly
      assign out_vec[c] = rd_v[0][c];
    end else begin : g_dly
      acc_t d [DLY];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < DLY; i++) d[i] <= '0;
        end else begin
          d[0] <= rd_v[0][c];
          for (int i = 1; i < DLY; i++) d[i] <= d[i-1];
        end
      end
      assign out_vec[c] = d[DLY-1];
    end
  end

  assign out_valid   = col_valid[COLS-1];
  assign out_row_idx = col_idx[COLS-1];

  always_comb begin
    any_loaded = 1'b0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        any_loaded |= ld[r][c];
  end

endmodule

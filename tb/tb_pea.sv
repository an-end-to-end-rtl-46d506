// tb_pea: self-checking test of the systolic PE array.
//
// Streams P back-to-back passes [ROWS x K] x [K x COLS] of random INT8 data into a 16 x 16
// array with K = 80 (the DFT-Net Linear layer of an 80-sample symbol: P = 5 column blocks for
// one Linear layer, P = 10 for the two merged layers), compares every output row with a sum
// computed here, and checks the cycle count: the last result must be stored exactly
// P*K + ROWS + COLS - 1 cycles after the first input, i.e. 431 cycles for P = 5 and 831 for
// P = 10, the counts the paper reports for Linear-1/2 and Linear-12 on the 16 x 16 array.
module tb_pea;
  import ddna_pkg::*;

  localparam int unsigned ROWS = 16;
  localparam int unsigned COLS = 16;
  localparam int unsigned K    = 80;
  localparam int unsigned PMAX = 10;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  act_t a_row [ROWS];
  logic a_valid, a_last;
  act_t w_col [COLS];
  logic out_valid;
  logic [$clog2(ROWS)-1:0] out_row_idx;
  acc_t out_vec [COLS];
  logic any_loaded;

  pea #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  act_t A [PMAX][ROWS][K];
  act_t W [PMAX][K][COLS];
  acc_t exp_v;
  int out_pass, out_row;
  int t_first, t_last_load;

  // output checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (out_row_idx != out_row[$clog2(ROWS)-1:0]) begin
        failures++;
        $display("row index mismatch pass %0d: got %0d exp %0d", out_pass, out_row_idx, out_row);
      end
      for (int c = 0; c < COLS; c++) begin
        exp_v = '0;
        for (int k = 0; k < K; k++) exp_v += acc_t'(A[out_pass][out_row][k] * W[out_pass][k][c]);
        checks++;
        if (out_vec[c] !== exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch pass %0d row %0d col %0d: got %0d exp %0d",
                                      out_pass, out_row, c, out_vec[c], exp_v);
        end
      end
      if (out_row == ROWS - 1) begin out_row = 0; out_pass++; end
      else out_row++;
    end
    if (rst_n && any_loaded) t_last_load = cyc;
  end

  task automatic run(input int P);
    for (int p = 0; p < P; p++) begin
      for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) A[p][r][k] = act_t'($urandom);
      for (int k = 0; k < K; k++) for (int c = 0; c < COLS; c++) W[p][k][c] = act_t'($urandom);
    end
    out_pass = 0; out_row = 0;
    @(negedge clk);
    t_first = cyc;
    for (int p = 0; p < P; p++) begin
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < ROWS; r++) a_row[r] = A[p][r][k];
        for (int c = 0; c < COLS; c++) w_col[c] = W[p][k][c];
        a_valid = 1'b1;
        a_last  = (k == K - 1);
        @(negedge clk);
      end
    end
    a_valid = 1'b0; a_last = 1'b0;
    repeat (ROWS + COLS + 2 * ROWS + 10) @(posedge clk);
    checks++;
    if (out_pass != P) begin
      failures++;
      $display("expected %0d passes out, saw %0d", P, out_pass);
    end
    checks++;
    if (t_last_load - t_first != P * K + ROWS + COLS - 1) begin
      failures++;
      $display("cycle count %0d, expected %0d", t_last_load - t_first, P * K + ROWS + COLS - 1);
    end else
      $display("P=%0d passes of K=%0d: last result stored after %0d cycles", P, K, t_last_load - t_first);
  endtask

  initial begin
    a_valid = 1'b0; a_last = 1'b0;
    for (int r = 0; r < ROWS; r++) a_row[r] = '0;
    for (int c = 0; c < COLS; c++) w_col[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // input changes right after the clock edge, like a registered driver
    @(negedge clk);
    run(5);
    run(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

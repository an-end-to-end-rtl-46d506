// tb_acc_buffer: self-checking test of Buffer 4 (partial-sum accumulation).
//
// Runs random output tiles: SINGLE passes (straight through) and FIRST, MID x n, LAST sequences
// of 1..6 basic blocks, each pass delivering the ROWS rows in order with random idle cycles.
// Checks that only SINGLE and LAST rows produce an output, exactly one cycle after the input,
// and that a LAST row equals the sum of all blocks of its tile.
module tb_acc_buffer;
  import ddna_pkg::*;
  localparam int unsigned ROWS = 16, LANES = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_valid;
  logic [$clog2(ROWS)-1:0] in_row = '0;
  acc_t in_vec [LANES], out_vec [LANES];
  blk_kind_e in_kind = BLK_SINGLE;
  acc_buffer #(.ROWS(ROWS), .LANES(LANES)) dut (.*);
  int checks = 0, failures = 0;
  acc_t sum [ROWS][LANES];
  logic exp_valid;
  acc_t exp_vec [LANES];

  initial begin
    for (int i = 0; i < LANES; i++) in_vec[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    exp_valid = 1'b0;
    for (int tile = 0; tile < 60; tile++) begin
      int nb;
      nb = (tile % 4 == 0) ? 1 : $urandom_range(2, 6);
      for (int blk = 0; blk < nb; blk++) begin
        blk_kind_e k;
        k = (nb == 1) ? BLK_SINGLE : (blk == 0) ? BLK_FIRST : (blk == nb - 1) ? BLK_LAST : BLK_MID;
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk);
          // check the previous cycle's output
          checks++;
          if (out_valid !== exp_valid) begin failures++; $display("out_valid %0b exp %0b", out_valid, exp_valid); end
          else if (exp_valid)
            for (int i = 0; i < LANES; i++) begin
              checks++;
              if (out_vec[i] !== exp_vec[i]) begin failures++; if (failures < 10) $display("row sum mismatch"); end
            end
          in_valid = 1'b1; in_row = r[$clog2(ROWS)-1:0]; in_kind = k;
          for (int i = 0; i < LANES; i++) begin
            in_vec[i] = acc_t'($urandom);
            sum[r][i] = (blk == 0) ? in_vec[i] : sum[r][i] + in_vec[i];
            exp_vec[i] = sum[r][i];
          end
          exp_valid = (k == BLK_SINGLE) || (k == BLK_LAST);
        end
      end
      // idle gap
      @(negedge clk);
      checks++;
      if (out_valid !== exp_valid) begin failures++; $display("out_valid mismatch at gap"); end
      else if (exp_valid)
        for (int i = 0; i < LANES; i++) begin checks++; if (out_vec[i] !== exp_vec[i]) failures++; end
      in_valid = 1'b0; exp_valid = 1'b0;
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("output while idle"); end
      end
    end
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

// tb_pingpong_buffer: self-checking test of Buffers 1/2 (the ping-pong result store).
//
// Writes random LANES-wide rows to random (bank, slot, row, column block) positions and reads
// random (bank, row pair, column block) positions back; each read returns four channels
// (slot 0 even row, slot 0 odd row, slot 1 even row, slot 1 odd row) one cycle after rd_en,
// compared with a reference copy.
module tb_pingpong_buffer;
  import ddna_pkg::*;
  localparam int unsigned ROWS = 16, LANES = 16, NBLK = 92;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic wr_en = 1'b0, wr_bank = 1'b0, wr_slot = 1'b0, rd_en = 1'b0, rd_bank = 1'b0;
  logic [$clog2(ROWS)-1:0] wr_row = '0;
  logic [$clog2(NBLK)-1:0] wr_nblk = '0, rd_nblk = '0;
  logic [$clog2(ROWS)-2:0] rd_pair = '0;
  act_t wr_data [LANES];
  act_t rd_data [4][LANES];
  pingpong_buffer #(.ROWS(ROWS), .LANES(LANES), .NBLK(NBLK)) dut (.*);
  int checks = 0, failures = 0;
  act_t ref_m [2][2][ROWS][NBLK][LANES];
  logic [1:0] written [2][2][ROWS][NBLK];
  act_t exp_d [4][LANES];
  logic exp_ok [4];
  logic pend;

  initial begin
    for (int i = 0; i < LANES; i++) wr_data[i] = '0;
    for (int b = 0; b < 2; b++) for (int s = 0; s < 2; s++) for (int r = 0; r < ROWS; r++)
      for (int n = 0; n < NBLK; n++) written[b][s][r][n] = '0;
    pend = 1'b0;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      if (pend)
        for (int ch = 0; ch < 4; ch++)
          if (exp_ok[ch])
            for (int i = 0; i < LANES; i++) begin
              checks++;
              if (rd_data[ch][i] !== exp_d[ch][i]) begin
                failures++;
                if (failures < 10) $display("ch %0d lane %0d got %0d exp %0d", ch, i, rd_data[ch][i], exp_d[ch][i]);
              end
            end
      // write
      wr_en = ($urandom % 2);
      wr_bank = $urandom % 2; wr_slot = $urandom % 2;
      wr_row = $urandom_range(0, ROWS - 1); wr_nblk = $urandom_range(0, (t < 10000) ? 3 : NBLK - 1);
      for (int i = 0; i < LANES; i++) wr_data[i] = act_t'($urandom);
      // read (sees memory before this cycle's write)
      rd_en = ($urandom % 2);
      rd_bank = $urandom % 2; rd_pair = $urandom_range(0, ROWS / 2 - 1);
      rd_nblk = $urandom_range(0, (t < 10000) ? 3 : NBLK - 1);
      pend = rd_en;
      for (int ch = 0; ch < 4; ch++) begin
        int s, r;
        s = ch / 2; r = 2 * rd_pair + ch % 2;
        exp_ok[ch] = written[rd_bank][s][r][rd_nblk][0];
        for (int i = 0; i < LANES; i++) exp_d[ch][i] = ref_m[rd_bank][s][r][rd_nblk][i];
      end
      if (wr_en) begin
        written[wr_bank][wr_slot][wr_row][wr_nblk] = 2'b01;
        for (int i = 0; i < LANES; i++) ref_m[wr_bank][wr_slot][wr_row][wr_nblk][i] = wr_data[i];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_act_mem: self-checking test of the activation memory (Buffer 3 with reshape).
//
// Keeps a reference image of both planes (element (k, row) per plane). Phase 1 fills the
// DFT-Net input area and plane 0 with whole-word DMA writes; phase 2 writes random column runs
// of LANES samples into random byte lanes and offsets (the reshape of Conv1D results); phase 3
// reads every word of every area and compares all ROWS bytes, checking the 1-cycle read latency.
module tb_act_mem;
  import ddna_pkg::*;

  localparam int unsigned ROWS  = 16;
  localparam int unsigned LANES = 16;
  localparam int unsigned HALF  = 640;
  localparam int unsigned PW    = 768;
  localparam int unsigned NWORD = HALF + PW;   // global words 0 .. HALF+PW-1

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        fw_en = 1'b0, cw_en = 1'b0, rd_en = 1'b0;
  logic [15:0] fw_addr = '0, cw_k = '0, rd_addr = '0;
  act_t        fw_data [ROWS];
  logic [$clog2(ROWS)-1:0] cw_lane = '0;
  act_t        cw_data [2][LANES];
  act_t        rd_data [ROWS];

  act_mem #(.ROWS(ROWS), .LANES(LANES), .HALF(HALF), .PLANE_WORDS(PW)) dut (.*);

  int checks = 0, failures = 0;
  act_t ref_m [NWORD][ROWS];   // indexed by global word address

  // global word of plane p, local word l
  function automatic int gaddr(int p, int l);
    if (p == 1) return HALF + l;
    return (l < HALF) ? l : HALF + l;   // plane 0 above HALF is the area at 2*HALF
  endfunction

  initial begin
    for (int r = 0; r < ROWS; r++) fw_data[r] = '0;
    for (int p = 0; p < 2; p++) for (int l = 0; l < LANES; l++) cw_data[p][l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // ---- phase 1: whole words everywhere
    for (int a = 0; a < NWORD; a++) begin
      @(negedge clk);
      fw_en = 1'b1; fw_addr = 16'(a);
      for (int r = 0; r < ROWS; r++) begin fw_data[r] = act_t'($urandom); ref_m[a][r] = fw_data[r]; end
    end
    @(negedge clk) fw_en = 1'b0;
    // ---- phase 2: column runs into both planes
    for (int n = 0; n < 400; n++) begin
      int k0, lane;
      k0 = $urandom_range(0, HALF - LANES);
      lane = $urandom_range(0, ROWS - 1);
      @(negedge clk);
      cw_en = 1'b1; cw_k = 16'(k0); cw_lane = lane[$clog2(ROWS)-1:0];
      for (int p = 0; p < 2; p++)
        for (int l = 0; l < LANES; l++) begin
          cw_data[p][l] = act_t'($urandom);
          ref_m[gaddr(p, k0 + l)][lane] = cw_data[p][l];
        end
    end
    @(negedge clk) cw_en = 1'b0;
    // ---- phase 3: read back, data one cycle after the address
    for (int a = 0; a < NWORD; a++) begin
      @(negedge clk);
      rd_en = 1'b1; rd_addr = 16'(a);
      @(negedge clk);
      rd_en = 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (rd_data[r] !== ref_m[a][r]) begin
          failures++;
          if (failures < 10) $display("word %0d row %0d: got %0d exp %0d", a, r, rd_data[r], ref_m[a][r]);
        end
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

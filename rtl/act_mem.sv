// act_mem: activation memory of the PEA, including Buffer 3 and the reshape of DFT-Net outputs.
//
// A word k holds ROWS INT8 values, one per PEA row; reading word k gives the PEA one column of its
// activation matrix. For DFT-Net, row 2f / 2f+1 of a word is the real / imaginary part of sample
// k of symbol f, loaded by DMA as whole words. For Demod-Net each PEA row is one OFDM frame (the
// paper's merging of 2kF input groups), so the word k must hold sample k of ROWS different
// frames. The DFT-Net results of frame g arrive from Conv1D as LANES consecutive samples at once;
// storing them means writing byte g of LANES consecutive words in one cycle. That is the reshape:
// the memory is split into ROWS byte-wide banks with element (k, g) in bank (k + g) mod ROWS at
// address (k div ROWS) * ROWS + g, so both a whole word and a run of up to ROWS consecutive words
// of one byte lane touch every bank at most once (skewed banking, this design's choice).
//
// Two planes hold the real and imaginary parts for Demod-Net, so one Conv1D result (Re and Im of
// LANES samples) is written in one cycle. Global word addresses: [0, HALF) plane 0,
// [HALF, 2*HALF) plane 1, [2*HALF, PLANE_WORDS + HALF) plane 0 again (the DFT-Net input area).
// HALF defaults to F*S = 640.
//
// Interface: fw_* whole-word write (DMA), cw_* column write (reshape; cw_k is the word offset in
// both planes, cw_lane the byte lane), rd_* read with data one cycle after rd_en. fw and cw must
// not be used in the same cycle (the controller gives cw priority).
module act_mem
  import ddna_pkg::*;
#(
  parameter int unsigned ROWS        = 16,
  parameter int unsigned LANES       = 16,
  parameter int unsigned HALF        = 640,
  parameter int unsigned PLANE_WORDS = 768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fw_en,
  input  logic [15:0] fw_addr,
  input  act_t        fw_data [ROWS],
  input  logic        cw_en,
  input  logic [15:0] cw_k,
  input  logic [$clog2(ROWS)-1:0] cw_lane,
  input  act_t        cw_data [2][LANES],
  input  logic        rd_en,
  input  logic [15:0] rd_addr,
  output act_t        rd_data [ROWS]
);

  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned AW = $clog2(PLANE_WORDS);

  function automatic logic plane_of(logic [15:0] a);
    return (32'(a) >= HALF) && (32'(a) < 2 * HALF);
  endfunction
  function automatic logic [AW-1:0] local_of(logic [15:0] a);
    return (32'(a) < HALF) ? AW'(a) : AW'(32'(a) - HALF);
  endfunction

  // ---------------------------------------------------------------- write steering per bank
  logic          we    [2][ROWS];
  logic [AW-1:0] waddr [2][ROWS];
  logic [DW-1:0] wdata [2][ROWS];

  logic          fw_plane;
  logic [AW-1:0] fw_loc;

  assign fw_plane = plane_of(fw_addr);
  assign fw_loc   = local_of(fw_addr);

  for (genvar b = 0; b < ROWS; b++) begin : g_wsteer
    logic [RW-1:0] fw_g;   // frame row held by bank b in a full-word write
    logic [RW-1:0] cw_l;   // lane of the column write that lands in bank b
    logic [AW-1:0] cw_kk;  // element index written to bank b
    assign fw_g  = RW'(b) - RW'(fw_loc);
    assign cw_l  = RW'(b) - cw_lane - RW'(cw_k);
    assign cw_kk = AW'(32'(cw_k) + 32'(cw_l));
    for (genvar p = 0; p < 2; p++) begin : g_p
      always_comb begin
        we[p][b] = 1'b0; waddr[p][b] = '0; wdata[p][b] = '0;
        if (fw_en && (fw_plane == 1'(p))) begin
          we[p][b]    = 1'b1;
          waddr[p][b] = AW'((32'(fw_loc) / ROWS) * ROWS + 32'(fw_g));
          wdata[p][b] = fw_data[fw_g];
        end else if (cw_en && 32'(cw_l) < LANES) begin
          we[p][b]    = 1'b1;
          waddr[p][b] = AW'((32'(cw_kk) / ROWS) * ROWS + 32'(cw_lane));
          wdata[p][b] = cw_data[p][cw_l];
        end
      end
    end
  end

  // ---------------------------------------------------------------- banks, read: one byte per bank, then rotate
  logic [DW-1:0] rd_raw [ROWS];
  logic [RW-1:0] rd_rot;
  logic          rd_plane, rd_plane_q;
  logic [AW-1:0] rd_loc;

  assign rd_plane = plane_of(rd_addr);
  assign rd_loc   = local_of(rd_addr);

  for (genvar b = 0; b < ROWS; b++) begin : g_bank
    logic [RW-1:0] g;
    logic [AW-1:0] ra;
    assign g  = RW'(b) - RW'(rd_loc);
    assign ra = AW'((32'(rd_loc) / ROWS) * ROWS + 32'(g));
    for (genvar p = 0; p < 2; p++) begin : g_plane
      logic [DW-1:0] mem [PLANE_WORDS];
      logic [DW-1:0] q;
      always_ff @(posedge clk) begin
        if (we[p][b]) mem[waddr[p][b]] <= wdata[p][b];
      end
      always_ff @(posedge clk) begin
        if (rd_en) q <= mem[ra];
      end
    end
    assign rd_raw[b] = rd_plane_q ? g_plane[1].q : g_plane[0].q;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_plane_q <= rd_plane;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_rot <= '0;
    else if (rd_en) rd_rot <= RW'(rd_loc);
  end

  always_comb begin
    for (int g = 0; g < ROWS; g++) rd_data[g] = act_t'(rd_raw[RW'(32'(g) + 32'(rd_rot))]);
  end

  a_no_write_collision: assert property (@(posedge clk) disable iff (!rst_n) !(fw_en && cw_en));

endmodule

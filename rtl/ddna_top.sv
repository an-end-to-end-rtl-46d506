// ddna_top: the DFT-Demodulation Net Accelerator (DDNA), a streaming INT8 accelerator for the
// DFT-Net and Demod-Net layers of a neural-network OFDM receiver.
//
// Data path (all widths INT8 unless noted):
//   DMA stream in --> activation memory / weight memory / bias memory
//   activation memory + weight memory --> PEA (ROWS x COLS systolic array, 32-bit sums)
//     --> Buffer 4 (basic-block accumulation) --> requantization (+ INT16 bias, m * 2^-n)
//     --> Buffers 1/2 (ping-pong) --> Conv1D unit (2x4 mixing, LeakyReLU branch, requant)
//     --> output FIFO --> DMA stream out        (IDFT output, Demod-Net scores)
//      or --> activation memory (Buffer 3, reshaped so each PEA row holds one frame)
// Control: an AXI4-Lite register file (GP port) and the sequencer in ddna_ctrl. A launch is one
// or two Linear layers on the PEA, optionally followed automatically by Conv1D on the bank just
// written; status bits array_done, conv_done and recv_done are polled by the processor as in
// the paper's control flow (configure registers, DMA the data in, raise start_signal, poll,
// DMA results out, pull the signals low, repeat).
//
// Ports: s_axil_* control (32-bit AXI4-Lite, 8-bit addresses); s_axis_* input stream of IN_W
// bits (a word for the memory selected by REG_LOAD, written at consecutive addresses from the
// start address); m_axis_* output stream, 2*COLS INT8 values per beat (channel 1 in the upper
// half), tlast on the last beat of a Conv1D launch.
//
// Defaults follow the paper's main configuration: PEA 16 x 16 (2kF rows with k = 1, F = 8;
// 16 columns), S = 80-sample symbols, F = 8 symbols per frame, Demod-Net outputs of up to
// 1472 values per branch (16-QAM). Memory depths, stream widths and the register map are this
// design's choices.
module ddna_top
  import ddna_pkg::*;
#(
  parameter int unsigned ROWS        = 16,    // 2kF
  parameter int unsigned COLS        = 16,
  parameter int unsigned F           = 8,     // symbols per frame
  parameter int unsigned S           = 80,    // samples per symbol incl. cyclic prefix
  parameter int unsigned NBLK        = 92,    // column blocks per Linear layer in Buffers 1/2
  parameter int unsigned PLANE_WORDS = 768,   // activation words per plane (>= F*S + S)
  parameter int unsigned WDEPTH      = 4096,  // weight memory words (COLS INT8 each)
  parameter int unsigned BDEPTH      = 256,   // bias memory words (COLS INT16 each)
  parameter int unsigned OFIFO       = 16,
  localparam int unsigned IN_W  = (ROWS * DW > COLS * BW) ? ROWS * DW : COLS * BW,
  localparam int unsigned OUT_W = 2 * COLS * DW
) (
  input  logic             clk,
  input  logic             rst_n,
  // GP: AXI4-Lite control
  input  logic [7:0]       s_axil_awaddr,
  input  logic             s_axil_awvalid,
  output logic             s_axil_awready,
  input  logic [31:0]      s_axil_wdata,
  input  logic             s_axil_wvalid,
  output logic             s_axil_wready,
  output logic [1:0]       s_axil_bresp,
  output logic             s_axil_bvalid,
  input  logic             s_axil_bready,
  input  logic [7:0]       s_axil_araddr,
  input  logic             s_axil_arvalid,
  output logic             s_axil_arready,
  output logic [31:0]      s_axil_rdata,
  output logic [1:0]       s_axil_rresp,
  output logic             s_axil_rvalid,
  input  logic             s_axil_rready,
  // HP: stream from DDR (DMA MM2S)
  input  logic [IN_W-1:0]  s_axis_tdata,
  input  logic             s_axis_tvalid,
  output logic             s_axis_tready,
  // HP: stream to DDR (DMA S2MM)
  output logic [OUT_W-1:0] m_axis_tdata,
  output logic             m_axis_tvalid,
  input  logic             m_axis_tready,
  output logic             m_axis_tlast
);

  localparam int unsigned WAW = $clog2(WDEPTH);
  localparam int unsigned BAW = $clog2(BDEPTH);
  localparam int unsigned RW  = $clog2(ROWS);
  localparam int unsigned TAGW = 17;

  // ================================================================ registers
  cfg_t        cfg;
  logic        start_signal;
  ld_target_e  ld_target;
  logic [15:0] ld_addr;
  logic        ld_addr_wr;
  logic        array_done_p, conv_done_p, recv_done_p;
  logic [31:0] cycles;

  axil_regs u_regs (
    .clk, .rst_n,
    .s_awaddr (s_axil_awaddr),  .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata  (s_axil_wdata),   .s_wvalid (s_axil_wvalid),  .s_wready (s_axil_wready),
    .s_bresp  (s_axil_bresp),   .s_bvalid (s_axil_bvalid),  .s_bready (s_axil_bready),
    .s_araddr (s_axil_araddr),  .s_arvalid(s_axil_arvalid), .s_arready(s_axil_arready),
    .s_rdata  (s_axil_rdata),   .s_rresp  (s_axil_rresp),   .s_rvalid (s_axil_rvalid),
    .s_rready (s_axil_rready),
    .cfg, .start_signal, .ld_target, .ld_addr, .ld_addr_wr,
    .set_array_done(array_done_p), .set_conv_done(conv_done_p), .set_recv_done(recv_done_p),
    .cycles
  );

  // ================================================================ sequencer
  logic        act_rd_en, w_rd_en, pea_valid, pea_last;
  logic [15:0] act_rd_addr, w_rd_addr;
  logic        pea_out_valid, pea_any_loaded;
  logic [RW-1:0] pea_out_row;
  blk_kind_e   hd_kind;
  logic        hd_layer;
  logic [7:0]  hd_nblk;
  logic [15:0] hd_baddr;
  rq_t         rq_lin1, rq_lin2, rq_conv;
  logic        wr_bank, pp_write;
  logic        pp_rd_en, pp_rd_bank;
  logic [7:0]  pp_rd_pair, pp_rd_nblk;
  logic        cv_in_valid, cv_odd, cv_out_valid;
  conv_mode_e  cv_mode;
  logic [TAGW-1:0] cv_in_tag, cv_out_tag;
  logic        cvw_rd_en, cvb_rd_en, cv_wb_capture;
  logic [15:0] cvw_rd_addr, cvb_rd_addr;
  logic [$clog2(OFIFO):0] out_space;
  logic        out_push, out_last, cw_en;
  logic [15:0] cw_k;
  logic [7:0]  cw_lane;
  logic        stall_start, stall_out, lin_busy, conv_busy;

  ddna_ctrl #(.ROWS(ROWS), .LANES(COLS), .TAGW(TAGW)) u_ctrl (
    .clk, .rst_n, .cfg, .start_signal,
    .act_rd_en, .act_rd_addr, .w_rd_en, .w_rd_addr, .pea_valid, .pea_last,
    .pea_out_valid, .pea_out_row,
    .hd_kind, .hd_layer, .hd_nblk, .hd_baddr, .rq_lin1, .rq_lin2, .wr_bank, .pp_write,
    .pp_rd_en, .pp_rd_bank, .pp_rd_pair, .pp_rd_nblk,
    .cv_in_valid, .cv_mode, .cv_odd, .cv_in_tag,
    .cvw_rd_en, .cvw_rd_addr, .cvb_rd_en, .cvb_rd_addr, .cv_wb_capture, .rq_conv,
    .cv_out_valid, .cv_out_tag,
    .out_space(5'(out_space > 16 ? 16 : out_space)),
    .out_push, .out_last, .cw_en, .cw_k, .cw_lane,
    .array_done_p, .conv_done_p, .cycles,
    .stall_start, .stall_out, .lin_busy, .conv_busy
  );

  // ================================================================ DMA input (HP)
  logic [15:0] ld_ptr;
  logic        ld_beat;
  assign s_axis_tready = !(ld_target == LD_ACT && cw_en);   // reshape writes have priority
  assign ld_beat       = s_axis_tvalid && s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          ld_ptr <= '0;
    else if (ld_addr_wr) ld_ptr <= ld_addr;
    else if (ld_beat)    ld_ptr <= ld_ptr + 1'b1;
  end

  // ================================================================ memories
  act_t fw_data [ROWS];
  act_t act_rd  [ROWS];
  act_t cw_data [2][COLS];
  always_comb for (int r = 0; r < ROWS; r++) fw_data[r] = act_t'(s_axis_tdata[r*DW +: DW]);

  act_mem #(.ROWS(ROWS), .LANES(COLS), .HALF(F*S), .PLANE_WORDS(PLANE_WORDS)) u_act (
    .clk, .rst_n,
    .fw_en  (ld_beat && ld_target == LD_ACT), .fw_addr(ld_ptr), .fw_data,
    .cw_en, .cw_k, .cw_lane(RW'(cw_lane)), .cw_data,
    .rd_en  (act_rd_en), .rd_addr(act_rd_addr), .rd_data(act_rd)
  );

  logic [COLS*DW-1:0] w_rdata_a, w_rdata_b;
  dp_ram #(.WIDTH(COLS*DW), .DEPTH(WDEPTH)) u_wmem (
    .clk,
    .we     (ld_beat && ld_target == LD_WEIGHT), .waddr(WAW'(ld_ptr)),
    .wdata  (s_axis_tdata[COLS*DW-1:0]),
    .re_a   (w_rd_en),   .raddr_a(WAW'(w_rd_addr)),   .rdata_a(w_rdata_a),
    .re_b   (cvw_rd_en), .raddr_b(WAW'(cvw_rd_addr)), .rdata_b(w_rdata_b)
  );

  logic [COLS*BW-1:0] b_rdata_a, b_rdata_b;
  dp_ram #(.WIDTH(COLS*BW), .DEPTH(BDEPTH)) u_bmem (
    .clk,
    .we     (ld_beat && ld_target == LD_BIAS), .waddr(BAW'(ld_ptr)),
    .wdata  (s_axis_tdata[COLS*BW-1:0]),
    .re_a   (1'b1),      .raddr_a(BAW'(hd_baddr)),    .rdata_a(b_rdata_a),
    .re_b   (cvb_rd_en), .raddr_b(BAW'(cvb_rd_addr)), .rdata_b(b_rdata_b)
  );

  // ================================================================ PEA
  act_t w_col [COLS];
  acc_t pea_vec [COLS];
  always_comb for (int c = 0; c < COLS; c++) w_col[c] = act_t'(w_rdata_a[c*DW +: DW]);

  pea #(.ROWS(ROWS), .COLS(COLS)) u_pea (
    .clk, .rst_n,
    .a_row(act_rd), .a_valid(pea_valid), .a_last(pea_last), .w_col,
    .out_valid(pea_out_valid), .out_row_idx(pea_out_row), .out_vec(pea_vec),
    .any_loaded(pea_any_loaded)
  );

  // ================================================================ Buffer 4 and quantization
  logic          b4_valid;
  acc_t          b4_vec [COLS];
  logic [RW-1:0] s1_row, s2_row;
  logic          s1_layer, s2_layer;
  logic [7:0]    s1_nblk, s2_nblk;

  acc_buffer #(.ROWS(ROWS), .LANES(COLS)) u_buf4 (
    .clk, .rst_n,
    .in_valid(pea_out_valid), .in_row(pea_out_row), .in_vec(pea_vec), .in_kind(hd_kind),
    .out_valid(b4_valid), .out_vec(b4_vec)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_row <= '0; s1_layer <= 1'b0; s1_nblk <= '0;
      s2_row <= '0; s2_layer <= 1'b0; s2_nblk <= '0;
    end else begin
      s1_row <= pea_out_row; s1_layer <= hd_layer; s1_nblk <= hd_nblk;
      s2_row <= s1_row;      s2_layer <= s1_layer; s2_nblk <= s1_nblk;
    end
  end

  bias_t lin_bias [COLS];
  always_comb for (int c = 0; c < COLS; c++) lin_bias[c] = bias_t'(b_rdata_a[c*BW +: BW]);

  logic q_valid;
  act_t q_vec [COLS];
  requant #(.LANES(COLS)) u_quant (
    .clk, .rst_n,
    .in_valid(b4_valid), .in_acc(b4_vec), .in_bias(lin_bias),
    .rq(s1_layer ? rq_lin2 : rq_lin1),
    .out_valid(q_valid), .out_q(q_vec)
  );
  assign pp_write = q_valid;

  // ================================================================ Buffers 1/2 (ping-pong)
  act_t pp_rd [4][COLS];
  pingpong_buffer #(.ROWS(ROWS), .LANES(COLS), .NBLK(NBLK)) u_pp (
    .clk,
    .wr_en(q_valid), .wr_bank(wr_bank), .wr_slot(s2_layer), .wr_row(s2_row),
    .wr_nblk($clog2(NBLK)'(s2_nblk)), .wr_data(q_vec),
    .rd_en(pp_rd_en), .rd_bank(pp_rd_bank), .rd_pair((RW-1)'(pp_rd_pair)),
    .rd_nblk($clog2(NBLK)'(pp_rd_nblk)), .rd_data(pp_rd)
  );

  // ================================================================ Conv1D
  act_t  cv_w [2][4];
  bias_t cv_b [2];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < 2; o++) begin
        cv_b[o] <= '0;
        for (int i = 0; i < 4; i++) cv_w[o][i] <= '0;
      end
    end else if (cv_wb_capture) begin
      for (int o = 0; o < 2; o++) begin
        cv_b[o] <= bias_t'(b_rdata_b[o*BW +: BW]);
        for (int i = 0; i < 4; i++) cv_w[o][i] <= act_t'(w_rdata_b[(o*4+i)*DW +: DW]);
      end
    end
  end

  act_t cv_y [2][COLS];
  conv1d_unit #(.LANES(COLS), .TAGW(TAGW)) u_conv (
    .clk, .rst_n,
    .in_valid(cv_in_valid), .mode(cv_mode), .odd_row(cv_odd), .in_ch(pp_rd), .in_tag(cv_in_tag),
    .w(cv_w), .b(cv_b), .rq(rq_conv),
    .out_valid(cv_out_valid), .out_y(cv_y), .out_tag(cv_out_tag)
  );
  assign cw_data = cv_y;

  // ================================================================ output (sharing buffer -> HP)
  logic [OUT_W-1:0] out_word;
  always_comb
    for (int o = 0; o < 2; o++)
      for (int c = 0; c < COLS; c++) out_word[(o*COLS+c)*DW +: DW] = cv_y[o][c];

  out_fifo #(.WIDTH(OUT_W), .DEPTH(OFIFO)) u_out (
    .clk, .rst_n,
    .push(out_push), .push_data(out_word), .push_last(out_last), .space(out_space),
    .m_tvalid(m_axis_tvalid), .m_tready(m_axis_tready), .m_tdata(m_axis_tdata),
    .m_tlast(m_axis_tlast), .recv_done(recv_done_p)
  );

endmodule

// tb_ddna_top: end-to-end test of the accelerator at its default parameters.
//
// It plays the processor's part of the control flow: configure registers over AXI4-Lite, move
// data and weights in over the input stream, raise start_signal, poll the status bits, take the
// results from the output stream, pull the status bits low, repeat. The workload is the paper's
// evaluated receiver: DFT-Net followed by Demod2-Net for QPSK on the OFDM frame of the paper
// (F = 8 symbols of S = 80 samples, D*m = 368*2 = 736 soft-bit positions per branch), with
// random INT8 weights and inputs. Sixteen frames go through DFT-Net one after the other (merged
// Linear-12 on the PEA, Conv1D writing the reshaped result into the activation memory as one PEA
// row per frame); then Demod2-Net runs its two Linear layers over all 16 frames in 46 launches of
// 8 accumulated basic blocks each (the weights for launch j+1 stream in while launch j computes),
// and the last launch's Conv1D with the LeakyReLU branch streams 16 x 46 result beats out. An
// IDFT-style run (DFT-Net result to the output stream) with the output held back exercises the
// output stall and the ping-pong bank stall. Every output value is compared with a model of the
// same integer arithmetic written here, and the mechanisms seen are counted.
module tb_ddna_top;
  import ddna_pkg::*;

  localparam int ROWS = 16, COLS = 16, F = 8, S = 80, FS = F * S, HALF = FS;
  localparam int NFR  = ROWS;           // frames merged into one Demod-Net batch (2kF)
  localparam int DM   = 736;            // D*m for QPSK
  localparam int NBD  = DM / COLS;      // 46 column blocks
  localparam int NBS  = S / COLS;       // 5 column blocks for DFT-Net
  localparam int KB   = 80;             // basic-block depth along the inner dimension
  localparam int KBD  = FS / KB;        // 8 basic blocks for a Demod-Net Linear layer
  localparam int IN_W = 256, OUT_W = 2 * COLS * 8;
  localparam int DFT_IN = 2 * HALF;     // activation word where a DFT-Net input frame is loaded

  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 1'b0, wvalid = 1'b0, bready = 1'b0, arvalid = 1'b0, rready = 1'b0;
  logic [31:0] wdata = '0, rdata;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [1:0]  bresp, rresp;
  logic [IN_W-1:0]  s_tdata = '0;
  logic             s_tvalid = 1'b0, s_tready;
  logic [OUT_W-1:0] m_tdata;
  logic             m_tvalid, m_tready, m_tlast;

  ddna_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tready(m_tready),
    .m_axis_tlast(m_tlast)
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ model data
  int y_re [NFR][F][S], y_im [NFR][F][S];
  int wr [S][S], wi [S][S], b_r [S], b_i [S];          // DFT-Net Linear (n, k)
  int cm [2][4], cb [2];                                // DFT-Net Conv1D
  int w1 [DM][FS], w2 [DM][FS], bd1 [DM], bd2 [DM];     // Demod2-Net Linear (d, k)
  int dm [2][4], db [2];                                // Demod2-Net Conv1D
  int xre [NFR][FS], xim [NFR][FS];                     // DFT-Net output = Demod-Net input
  int exp_idft [F][S][2];
  int exp_sc [NFR][DM][2];
  localparam int RQ_L_M = 3, RQ_L_N = 6, RQ_C_M = 5, RQ_C_N = 4, RQ_D_M = 3, RQ_D_N = 9;

  function automatic int sat8(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction
  function automatic int rq(longint acc, int m, int n);
    longint p = acc * m;
    if (n > 0) p = p + (longint'(1) << (n - 1));
    return sat8(p >>> n);
  endfunction
  function automatic int lrelu(int x);
    return (x >= 0) ? x : ((x * 13) >>> 7);
  endfunction
  function automatic int srand(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // ------------------------------------------------------------------ AXI4-Lite and stream drivers
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); awaddr = a; awvalid = 1'b1; wdata = d; wvalid = 1'b1;
    do @(posedge clk); while (!awready);
    @(negedge clk); awvalid = 1'b0; wvalid = 1'b0; bready = 1'b1;
    do @(posedge clk); while (!bvalid);
    @(negedge clk); bready = 1'b0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk); araddr = a; arvalid = 1'b1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 1'b0; rready = 1'b1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    @(negedge clk); rready = 1'b0;
  endtask

  task automatic poll_status(input int bitn);
    logic [31:0] st;
    do axil_read(REG_STATUS, st); while (!st[bitn]);
  endtask

  logic [IN_W-1:0] dma_q [$];
  task automatic dma_send();
    while (dma_q.size() > 0) begin
      logic rdy;
      @(negedge clk); s_tdata = dma_q.pop_front(); s_tvalid = 1'b1;
      // tready is sampled half a cycle before the edge that takes the beat
      do begin #1 rdy = s_tready; @(posedge clk); if (!rdy) @(negedge clk); end while (!rdy);
    end
    @(negedge clk); s_tvalid = 1'b0;
  endtask

  // ------------------------------------------------------------------ output sink
  logic [OUT_W-1:0] out_q [$];
  logic             last_q [$];
  int  sink_mode = 0;   // 0 always ready, 1 random, 2 held back
  always @(negedge clk) begin
    case (sink_mode)
      0: m_tready = 1'b1;
      1: m_tready = ($urandom % 4) != 0;
      default: m_tready = 1'b0;
    endcase
  end
  always @(posedge clk) begin
    if (rst_n && m_tvalid && m_tready) begin
      out_q.push_back(m_tdata);
      last_q.push_back(m_tlast);
    end
  end

  // ------------------------------------------------------------------ mechanism counters
  int n_dma_stall = 0, n_out_stall = 0, n_start_stall = 0, n_overlap = 0;
  int n_first = 0, n_mid = 0, n_last = 0, n_single = 0, n_reshape = 0, n_demod_conv = 0;
  int n_two_layer = 0;
  always @(posedge clk) if (rst_n) begin
    if (s_tvalid && !s_tready) n_dma_stall++;
    if (dut.stall_out) n_out_stall++;
    if (dut.stall_start) n_start_stall++;
    if (dut.lin_busy && dut.conv_busy) n_overlap++;
    if (dut.pea_out_valid && dut.pea_out_row == '0) begin
      case (dut.hd_kind)
        BLK_FIRST: n_first++;
        BLK_MID: n_mid++;
        BLK_LAST: n_last++;
        default: n_single++;
      endcase
      if (dut.hd_layer) n_two_layer++;
    end
    if (dut.cw_en) n_reshape++;
    if (dut.cv_out_valid && dut.cv_mode == CONV_DEMOD) n_demod_conv++;
  end

  // ------------------------------------------------------------------ loaders
  task automatic queue_dft_input(input int g);
    for (int k = 0; k < S; k++) begin
      logic [IN_W-1:0] w = '0;
      for (int f = 0; f < F; f++) begin
        w[(2*f)*8 +: 8]   = 8'(y_re[g][f][k]);
        w[(2*f+1)*8 +: 8] = 8'(y_im[g][f][k]);
      end
      dma_q.push_back(w);
    end
  endtask

  task automatic load_dft_params();
    // weights: layer l, column block j, k -> word ((l*NBS + j)*1 + 0)*S + k
    axil_write(REG_LOAD, {16'd0, 14'd0, LD_WEIGHT});
    for (int l = 0; l < 2; l++)
      for (int j = 0; j < NBS; j++)
        for (int k = 0; k < S; k++) begin
          logic [IN_W-1:0] w = '0;
          for (int c = 0; c < COLS; c++) w[c*8 +: 8] = 8'(l ? wi[j*COLS+c][k] : wr[j*COLS+c][k]);
          dma_q.push_back(w);
        end
    // conv kernels: word 4000 (DFT-Net), 4001 (Demod-Net)
    begin
      logic [IN_W-1:0] w0 = '0, w1v = '0;
      for (int o = 0; o < 2; o++)
        for (int i = 0; i < 4; i++) begin
          w0[(o*4+i)*8 +: 8]  = 8'(cm[o][i]);
          w1v[(o*4+i)*8 +: 8] = 8'(dm[o][i]);
        end
      dma_send();
      axil_write(REG_LOAD, {16'd4000, 14'd0, LD_WEIGHT});
      dma_q.push_back(w0); dma_q.push_back(w1v);
      dma_send();
    end
    // biases: DFT-Net words 0..9, conv words 10 and 11, Demod-Net from word 16 (2 per launch)
    axil_write(REG_LOAD, {16'd0, 14'd0, LD_BIAS});
    for (int l = 0; l < 2; l++)
      for (int j = 0; j < NBS; j++) begin
        logic [IN_W-1:0] w = '0;
        for (int c = 0; c < COLS; c++) w[c*16 +: 16] = 16'(l ? b_i[j*COLS+c] : b_r[j*COLS+c]);
        dma_q.push_back(w);
      end
    begin
      logic [IN_W-1:0] w0 = '0, w1v = '0;
      w0[15:0] = 16'(cb[0]); w0[31:16] = 16'(cb[1]);
      w1v[15:0] = 16'(db[0]); w1v[31:16] = 16'(db[1]);
      dma_q.push_back(w0); dma_q.push_back(w1v);
      repeat (4) dma_q.push_back('0);           // words 12..15 unused
    end
    for (int j = 0; j < NBD; j++)
      for (int l = 0; l < 2; l++) begin
        logic [IN_W-1:0] w = '0;
        for (int c = 0; c < COLS; c++) w[c*16 +: 16] = 16'(l ? bd2[j*COLS+c] : bd1[j*COLS+c]);
        dma_q.push_back(w);
      end
    dma_send();
  endtask

  // Demod-Net weights of column block j into weight region `base`
  task automatic queue_demod_weights(input int j);
    for (int l = 0; l < 2; l++)
      for (int i = 0; i < KBD; i++)
        for (int k = 0; k < KB; k++) begin
          logic [IN_W-1:0] w = '0;
          for (int c = 0; c < COLS; c++)
            w[c*8 +: 8] = 8'(l ? w2[j*COLS+c][i*KB+k] : w1[j*COLS+c][i*KB+k]);
          dma_q.push_back(w);
        end
  endtask

  // ------------------------------------------------------------------ golden model
  task automatic model();
    for (int g = 0; g < NFR; g++) begin
      int u [2][2*F][S];
      for (int l = 0; l < 2; l++)
        for (int r = 0; r < 2 * F; r++)
          for (int n = 0; n < S; n++) begin
            longint acc = l ? b_i[n] : b_r[n];
            for (int k = 0; k < S; k++) begin
              int a = r[0] ? y_im[g][r/2][k] : y_re[g][r/2][k];
              acc += a * (l ? wi[n][k] : wr[n][k]);
            end
            u[l][r][n] = rq(acc, RQ_L_M, RQ_L_N);
          end
      for (int f = 0; f < F; f++)
        for (int n = 0; n < S; n++) begin
          int x [4];
          x[0] = u[0][2*f][n]; x[1] = u[0][2*f+1][n]; x[2] = u[1][2*f][n]; x[3] = u[1][2*f+1][n];
          for (int o = 0; o < 2; o++) begin
            longint acc = cb[o];
            for (int i = 0; i < 4; i++) acc += x[i] * cm[o][i];
            if (o == 0) xre[g][f*S+n] = rq(acc, RQ_C_M, RQ_C_N);
            else        xim[g][f*S+n] = rq(acc, RQ_C_M, RQ_C_N);
            if (g == 0) exp_idft[f][n][o] = rq(acc, RQ_C_M, RQ_C_N);
          end
        end
    end
    for (int g = 0; g < NFR; g++)
      for (int d = 0; d < DM; d++) begin
        longint a1 = bd1[d], a2 = bd2[d];
        int v1, v2, x [4];
        for (int k = 0; k < FS; k++) begin
          a1 += xre[g][k] * w1[d][k];
          a2 += xim[g][k] * w2[d][k];
        end
        v1 = rq(a1, RQ_D_M, RQ_D_N); v2 = rq(a2, RQ_D_M, RQ_D_N);
        x[0] = v1; x[1] = v2; x[2] = lrelu(v1); x[3] = lrelu(v2);
        for (int o = 0; o < 2; o++) begin
          longint acc = db[o];
          for (int i = 0; i < 4; i++) acc += x[i] * dm[o][i];
          exp_sc[g][d][o] = rq(acc, RQ_C_M, RQ_C_N);
        end
      end
  endtask

  // ------------------------------------------------------------------ launches
  task automatic cfg_dft(input int g, input bit to_act);
    axil_write(REG_L_K,    32'(KB));
    axil_write(REG_L_GEOM, {8'd0, 8'd0, 8'(NBS), 8'd1});
    axil_write(REG_L_ACT,  {16'(DFT_IN), 16'(DFT_IN)});
    axil_write(REG_L_WB,   {16'd0, 16'd0});
    axil_write(REG_RQ_L1,  {11'd0, 5'(RQ_L_N), 16'(RQ_L_M)});
    axil_write(REG_RQ_L2,  {11'd0, 5'(RQ_L_N), 16'(RQ_L_M)});
    axil_write(REG_RQ_CV,  {11'd0, 5'(RQ_C_N), 16'(RQ_C_M)});
    axil_write(REG_C_GEOM, {8'd0, 8'(g), 8'(NBS), 8'(F)});
    axil_write(REG_C_WB,   {16'd10, 16'd4000});
    axil_write(REG_C_RS,   32'(S));
  endtask

  task automatic launch(input logic [31:0] ctrl);
    axil_write(REG_STATUS, 32'd0);              // pull the status signals low
    axil_write(REG_CTRL, ctrl | 32'd1);         // start_signal high
    axil_write(REG_CTRL, ctrl);                 // and low again (the engine takes the edge)
  endtask

  localparam logic [31:0] C_CONV = 32'h2, C_DEMOD = 32'h4, C_TOACT = 32'h8, C_TWO = 32'h10;

  int idx;
  logic [31:0] rd;
  int t0, t1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check_beats_idft();
    // 8 symbols x 5 column blocks, beats in order (f, j)
    idx = 0;
    for (int f = 0; f < F; f++)
      for (int j = 0; j < NBS; j++) begin
        logic [OUT_W-1:0] b;
        checks++;
        if (out_q.size() == 0) begin failures++; $display("IDFT beat missing"); return; end
        b = out_q.pop_front();
        void'(last_q.pop_front());
        for (int c = 0; c < COLS; c++)
          for (int o = 0; o < 2; o++) begin
            checks++;
            if (int'($signed(b[(o*COLS+c)*8 +: 8])) != exp_idft[f][j*COLS+c][o]) begin
              failures++;
              if (failures < 10) $display("IDFT f%0d n%0d o%0d got %0d exp %0d", f, j*COLS+c, o,
                                          $signed(b[(o*COLS+c)*8 +: 8]), exp_idft[f][j*COLS+c][o]);
            end
          end
      end
  endtask

  task automatic check_beats_demod(input int g);
    // NBD beats per frame, beat j holds scores of bits j*COLS .. j*COLS+COLS-1
    for (int j = 0; j < NBD; j++) begin
      logic [OUT_W-1:0] b;
      logic lst;
      checks++;
      if (out_q.size() == 0) begin failures++; $display("Demod beat missing"); return; end
      b = out_q.pop_front();
      lst = last_q.pop_front();
      if (lst != (g == NFR - 1 && j == NBD - 1)) begin failures++; $display("tlast misplaced"); end
      for (int c = 0; c < COLS; c++)
        for (int o = 0; o < 2; o++) begin
          int got;
          got = int'($signed(b[(o*COLS+c)*8 +: 8]));
          checks++;
          if (got != exp_sc[g][j*COLS+c][o]) begin
            failures++;
            if (failures < 10) $display("score g%0d d%0d o%0d got %0d exp %0d", g, j*COLS+c, o,
                                        got, exp_sc[g][j*COLS+c][o]);
          end
        end
    end
  endtask

  initial begin
    // -------------------------------------------------------------- random model and data
    for (int g = 0; g < NFR; g++)
      for (int f = 0; f < F; f++)
        for (int k = 0; k < S; k++) begin y_re[g][f][k] = srand(-64, 63); y_im[g][f][k] = srand(-64, 63); end
    for (int n = 0; n < S; n++) begin
      b_r[n] = srand(-300, 300); b_i[n] = srand(-300, 300);
      for (int k = 0; k < S; k++) begin wr[n][k] = srand(-8, 7); wi[n][k] = srand(-8, 7); end
    end
    for (int o = 0; o < 2; o++) begin
      cb[o] = srand(-50, 50); db[o] = srand(-50, 50);
      for (int i = 0; i < 4; i++) begin cm[o][i] = srand(-4, 3); dm[o][i] = srand(-4, 3); end
    end
    for (int d = 0; d < DM; d++) begin
      bd1[d] = srand(-2000, 2000); bd2[d] = srand(-2000, 2000);
      for (int k = 0; k < FS; k++) begin w1[d][k] = srand(-8, 7); w2[d][k] = srand(-8, 7); end
    end
    model();

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    load_dft_params();

    // -------------------------------------------------------------- IDFT route, output held back
    sink_mode = 2;
    axil_write(REG_LOAD, {16'(DFT_IN), 14'd0, LD_ACT});
    queue_dft_input(0);
    dma_send();
    cfg_dft(0, 1'b0);
    // the first launch's Conv1D fills the output FIFO and stalls; the second launch's result
    // waits for Conv1D; the third finds both ping-pong banks taken and must wait
    for (int rep = 0; rep < 3; rep++) begin
      launch(C_CONV | C_TWO);
      if (rep < 2) poll_status(0);              // array_done
    end
    repeat (200) @(posedge clk);
    sink_mode = 1;
    poll_status(0);
    for (int rep = 0; rep < 3; rep++) begin
      wait (out_q.size() >= (rep + 1) * F * NBS);
    end
    repeat (20) @(posedge clk);
    poll_status(2);                             // recv_done
    for (int rep = 0; rep < 3; rep++) check_beats_idft();
    checks++;
    if (out_q.size() != 0) begin failures++; $display("extra IDFT beats %0d", out_q.size()); end

    // -------------------------------------------------------------- DFT-Net on 16 frames -> Buffer 3
    sink_mode = 0;
    for (int g = 0; g < NFR; g++) begin
      axil_write(REG_LOAD, {16'(DFT_IN), 14'd0, LD_ACT});
      queue_dft_input(g);
      dma_send();                               // may wait on the previous frame's reshape writes
      cfg_dft(g, 1'b1);
      t0 = cyc;
      launch(C_CONV | C_TOACT | C_TWO);
      poll_status(0);
      if (g == 0) begin
        axil_read(REG_CYCLES, rd);
        $display("DFT-Net Linear-12 launch: %0d engine cycles", rd);
        checks++;
        // 10 back-to-back passes of 80 plus array fill, Buffer 4 / quant and drain
        if (rd < 10 * KB || rd > 10 * KB + 2 * (ROWS + COLS) + 16) begin
          failures++; $display("DFT-Net launch cycle count %0d out of range", rd);
        end
      end
    end
    poll_status(1);                              // conv_done of the last frame

    // -------------------------------------------------------------- Demod2-Net, 46 launches
    axil_write(REG_LOAD, {16'd0, 14'd0, LD_WEIGHT});
    queue_demod_weights(0);
    dma_send();
    t0 = cyc;
    for (int j = 0; j < NBD; j++) begin
      int base;
      bit last;
      base = (j % 2) ? 2048 : 0;
      last = (j == NBD - 1);
      axil_write(REG_L_K,    32'(KB));
      axil_write(REG_L_GEOM, {8'd0, 8'(j), 8'd1, 8'(KBD)});
      axil_write(REG_L_ACT,  {16'(HALF), 16'd0});
      axil_write(REG_L_WB,   {16'(16 + 2 * j), 16'(base)});
      axil_write(REG_RQ_L1,  {11'd0, 5'(RQ_D_N), 16'(RQ_D_M)});
      axil_write(REG_RQ_L2,  {11'd0, 5'(RQ_D_N), 16'(RQ_D_M)});
      axil_write(REG_RQ_CV,  {11'd0, 5'(RQ_C_N), 16'(RQ_C_M)});
      axil_write(REG_C_GEOM, {8'd0, 8'd0, 8'(NBD), 8'(NFR)});
      axil_write(REG_C_WB,   {16'd11, 16'd4001});
      launch(last ? (C_CONV | C_DEMOD | C_TWO) : C_TWO);
      if (!last) begin
        // next launch's weights stream in while this one computes
        axil_write(REG_LOAD, {16'(((j + 1) % 2) ? 2048 : 0), 14'd0, LD_WEIGHT});
        queue_demod_weights(j + 1);
        dma_send();
      end
      poll_status(0);
      if (j == 0) begin
        axil_read(REG_CYCLES, rd);
        $display("Demod2-Net launch (2 layers x 8 basic blocks): %0d engine cycles", rd);
      end
    end
    sink_mode = 1;
    poll_status(1);
    poll_status(2);
    t1 = cyc;
    $display("Demod2-Net over %0d frames: %0d cycles including weight streaming", NFR, t1 - t0);

    // -------------------------------------------------------------- compare the scores
    checks++;
    if (out_q.size() != NFR * NBD) begin
      failures++; $display("expected %0d result beats, got %0d", NFR * NBD, out_q.size());
    end
    for (int g = 0; g < NFR; g++) check_beats_demod(g);

    // -------------------------------------------------------------- mechanisms
    $display("mechanisms: single=%0d first=%0d mid=%0d last=%0d layer2=%0d reshape=%0d demod_conv=%0d",
             n_single, n_first, n_mid, n_last, n_two_layer, n_reshape, n_demod_conv);
    $display("            overlap=%0d dma_stall=%0d out_stall=%0d start_stall=%0d",
             n_overlap, n_dma_stall, n_out_stall, n_start_stall);
    checks += 11;
    if (n_single == 0)     begin failures++; $display("never: single-block pass"); end
    if (n_first == 0)      begin failures++; $display("never: first basic block"); end
    if (n_mid == 0)        begin failures++; $display("never: middle basic block"); end
    if (n_last == 0)       begin failures++; $display("never: last basic block"); end
    if (n_two_layer == 0)  begin failures++; $display("never: merged second layer"); end
    if (n_reshape == 0)    begin failures++; $display("never: reshape write"); end
    if (n_demod_conv == 0) begin failures++; $display("never: Demod-Net Conv1D"); end
    if (n_overlap == 0)    begin failures++; $display("never: PEA and Conv1D overlapped"); end
    if (n_dma_stall == 0)  begin failures++; $display("never: DMA stalled by reshape"); end
    if (n_out_stall == 0)  begin failures++; $display("never: Conv1D stalled by output"); end
    if (n_start_stall == 0) begin failures++; $display("never: launch waited for its bank"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

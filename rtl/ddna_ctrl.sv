// ddna_ctrl: the DDNA sequencer, which turns one register-configured launch into unit activity.
//
// Linear engine. On a rising edge of start_signal (Algorithm 1, step 2.1) the register settings
// are captured and the engine streams PEA passes: for each layer (one, or two for the merged
// "Linear-12" form), for each output column block j, for each basic block i along the inner
// dimension, K cycles of activation words act_base + i*K + k and weight words
//   w_base + ((layer*n_blocks + j)*k_blocks + i)*K + k.
// Passes follow back to back. For every pass a tag {Buffer 4 usage, layer, destination column
// block, bias word} is queued; it is retired when the pass's last row leaves the PEA, and the
// head tag steers Buffer 4, the bias fetch, the requantization factor and the ping-pong write.
// When the last result row has been written, array_done is raised.
//
// Conv1D engine. If the launch enables Conv1D, the ping-pong bank just written is handed over and
// the Conv1D unit runs automatically after the PEA (Algorithm 1, step 3.2): it fetches the 2x4
// kernel word and the bias word, then reads c_groups x c_nblk buffer words, one per cycle, and
// routes each result either to the output stream or, for DFT-Net feeding Demod-Net, into the
// activation memory as frame lane c_lane at word f*S + column (Buffer 3, reshape). It stalls
// while the output FIFO lacks space. When it ends, conv_done is raised. The write bank toggles
// at each hand-over, so the next launch's matrix work overlaps this convolution (Fig. 10); a
// launch whose bank is still in use by Conv1D waits.
//
// The split into these two engines, the tag queue and all encodings are this design's own; the
// paper gives the five-class pipeline (register configuration, input loading, matrix, convolution,
// output), the status signals and the basic-block accumulation order.
module ddna_ctrl
  import ddna_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned LANES = 16,
  parameter int unsigned TAGW  = 17
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        start_signal,
  // PEA feed
  output logic        act_rd_en,
  output logic [15:0] act_rd_addr,
  output logic        w_rd_en,
  output logic [15:0] w_rd_addr,
  output logic        pea_valid,
  output logic        pea_last,
  input  logic        pea_out_valid,
  input  logic [$clog2(ROWS)-1:0] pea_out_row,
  // head tag for the post-PEA path
  output blk_kind_e   hd_kind,
  output logic        hd_layer,
  output logic [7:0]  hd_nblk,
  output logic [15:0] hd_baddr,
  output rq_t         rq_lin1,
  output rq_t         rq_lin2,
  output logic        wr_bank,
  input  logic        pp_write,        // a row is being written to the ping-pong buffer
  // Conv1D feed
  output logic        pp_rd_en,
  output logic        pp_rd_bank,
  output logic [7:0]  pp_rd_pair,
  output logic [7:0]  pp_rd_nblk,
  output logic        cv_in_valid,
  output conv_mode_e  cv_mode,
  output logic        cv_odd,
  output logic [TAGW-1:0] cv_in_tag,
  output logic        cvw_rd_en,
  output logic [15:0] cvw_rd_addr,
  output logic        cvb_rd_en,
  output logic [15:0] cvb_rd_addr,
  output logic        cv_wb_capture,   // the kernel and bias words are on the read ports
  output rq_t         rq_conv,
  input  logic        cv_out_valid,
  input  logic [TAGW-1:0] cv_out_tag,
  input  logic [4:0]  out_space,       // free entries of the output FIFO (saturated)
  output logic        out_push,
  output logic        out_last,
  output logic        cw_en,
  output logic [15:0] cw_k,
  output logic [7:0]  cw_lane,
  // status
  output logic        array_done_p,
  output logic        conv_done_p,
  output logic [31:0] cycles,
  // activity, for observation
  output logic        stall_start,     // a launch waits for its ping-pong bank
  output logic        stall_out,       // Conv1D waits for output FIFO space
  output logic        lin_busy,
  output logic        conv_busy
);

  localparam int unsigned TQ = 4;  // tag queue depth (passes in flight)

  // ================================================================ launch
  logic start_d, start_req;
  cfg_t lc;                         // captured configuration of the running linear launch

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_d <= 1'b0;
    else        start_d <= start_signal;
  end

  typedef enum logic [1:0] {L_IDLE, L_RUN, L_DRAIN} lstate_e;
  lstate_e ls;

  logic [15:0] k_cnt;
  logic [7:0]  i_cnt, j_cnt;
  logic        layer;
  logic        last_beat;

  // conv ownership of banks
  logic        cv_active, cv_pend;
  logic        cv_bank, pend_bank;
  cfg_t        cc, pend_cfg;

  logic bank_blocked;
  assign bank_blocked = (cv_active && cv_bank == wr_bank) || (cv_pend && pend_bank == wr_bank) ||
                        (cv_pend && cv_active);
  assign stall_start  = start_req && (ls == L_IDLE) && bank_blocked;

  // ================================================================ tag queue
  typedef struct packed {
    blk_kind_e   kind;
    logic        layer;
    logic [7:0]  nblk;
    logic [15:0] baddr;
  } tag_t;

  tag_t tq [TQ];
  logic [$clog2(TQ)-1:0] tq_wp, tq_rp;
  logic [$clog2(TQ):0]   tq_cnt;
  logic tq_push, tq_pop;
  tag_t tq_in;

  assign tq_pop = pea_out_valid && (pea_out_row == ($clog2(ROWS))'(ROWS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tq_wp <= '0; tq_rp <= '0; tq_cnt <= '0;
      for (int i = 0; i < TQ; i++) tq[i] <= '0;
    end else begin
      if (tq_push) begin tq[tq_wp] <= tq_in; tq_wp <= tq_wp + 1'b1; end
      if (tq_pop)  tq_rp <= tq_rp + 1'b1;
      tq_cnt <= tq_cnt + ($clog2(TQ)+1)'(tq_push) - ($clog2(TQ)+1)'(tq_pop);
    end
  end

  assign hd_kind  = tq[tq_rp].kind;
  assign hd_layer = tq[tq_rp].layer;
  assign hd_nblk  = tq[tq_rp].nblk;
  assign hd_baddr = tq[tq_rp].baddr;
  assign rq_lin1  = lc.rq_l1;
  assign rq_lin2  = lc.rq_l2;

  // ================================================================ linear engine
  logic [15:0] act_base;
  logic [31:0] w_off;
  logic [2:0]  drain_cnt;

  assign act_base  = layer ? lc.act_base2 : lc.act_base1;
  assign w_off     = ((32'(layer) * 32'(lc.n_blocks) + 32'(j_cnt)) * 32'(lc.k_blocks) + 32'(i_cnt))
                     * 32'(lc.k_len) + 32'(k_cnt);
  assign last_beat = (k_cnt == lc.k_len - 1'b1) && (i_cnt == lc.k_blocks - 1'b1) &&
                     (j_cnt == lc.n_blocks - 1'b1) && (layer == lc.two_layers);

  always_comb begin
    act_rd_en   = (ls == L_RUN);
    w_rd_en     = (ls == L_RUN);
    act_rd_addr = 16'(32'(act_base) + 32'(i_cnt) * 32'(lc.k_len) + 32'(k_cnt));
    w_rd_addr   = 16'(32'(lc.w_base) + w_off);
    tq_push     = (ls == L_RUN) && (k_cnt == lc.k_len - 1'b1);
    tq_in.layer = layer;
    tq_in.nblk  = 8'(lc.dst_nblk + j_cnt);
    tq_in.baddr = 16'(32'(lc.b_base) + 32'(layer) * 32'(lc.n_blocks) + 32'(j_cnt));
    if (lc.k_blocks == 8'd1)                 tq_in.kind = BLK_SINGLE;
    else if (i_cnt == 8'd0)                  tq_in.kind = BLK_FIRST;
    else if (i_cnt == lc.k_blocks - 1'b1)    tq_in.kind = BLK_LAST;
    else                                     tq_in.kind = BLK_MID;
  end

  logic handoff;   // linear launch finished with Conv1D enabled

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= L_IDLE; start_req <= 1'b0; lc <= '0;
      k_cnt <= '0; i_cnt <= '0; j_cnt <= '0; layer <= 1'b0;
      pea_valid <= 1'b0; pea_last <= 1'b0;
      wr_bank <= 1'b0; array_done_p <= 1'b0; handoff <= 1'b0;
      cycles <= '0; drain_cnt <= '0;
    end else begin
      array_done_p <= 1'b0;
      handoff      <= 1'b0;
      pea_valid    <= (ls == L_RUN);
      pea_last     <= (ls == L_RUN) && (k_cnt == lc.k_len - 1'b1);
      if (start_signal && !start_d) start_req <= 1'b1;
      unique case (ls)
        L_IDLE: begin
          if (start_req && !bank_blocked) begin
            start_req <= 1'b0;
            lc    <= cfg;
            k_cnt <= '0; i_cnt <= '0; j_cnt <= '0; layer <= 1'b0;
            cycles <= '0;
            ls    <= L_RUN;
          end
        end
        L_RUN: begin
          cycles <= cycles + 1'b1;
          if (last_beat) begin
            ls <= L_DRAIN;
            drain_cnt <= '0;
          end else if (k_cnt == lc.k_len - 1'b1) begin
            k_cnt <= '0;
            if (i_cnt == lc.k_blocks - 1'b1) begin
              i_cnt <= '0;
              if (j_cnt == lc.n_blocks - 1'b1) begin
                j_cnt <= '0;
                layer <= 1'b1;
              end else j_cnt <= j_cnt + 1'b1;
            end else i_cnt <= i_cnt + 1'b1;
          end else k_cnt <= k_cnt + 1'b1;
        end
        L_DRAIN: begin
          cycles <= cycles + 1'b1;
          // all tags retired and the last rows through Buffer 4 and quant
          if (tq_cnt == '0 && !tq_push) begin
            if (pp_write) drain_cnt <= '0;
            else if (drain_cnt == 3'd3) begin
              ls <= L_IDLE;
              array_done_p <= 1'b1;
              if (lc.conv_en) begin
                handoff <= 1'b1;
                wr_bank <= ~wr_bank;
              end
            end else drain_cnt <= drain_cnt + 1'b1;
          end
        end
        default: ls <= L_IDLE;
      endcase
    end
  end

  assign lin_busy = (ls != L_IDLE);

  // ================================================================ Conv1D engine
  typedef enum logic [1:0] {C_IDLE, C_WFETCH, C_RUN, C_DRAIN} cstate_e;
  cstate_e cs;

  logic [7:0]  g_cnt, nb_cnt;
  logic [31:0] issued, written, total;
  logic        issue, c_last;
  logic        wf_phase;

  assign total   = 32'(cc.c_groups) * 32'(cc.c_nblk);
  assign c_last  = (g_cnt == cc.c_groups - 1'b1) && (nb_cnt == cc.c_nblk - 1'b1);
  assign issue   = (cs == C_RUN) && (cc.conv_to_act || out_space >= 5'd4);
  assign stall_out = (cs == C_RUN) && !issue;

  assign pp_rd_en   = issue;
  assign pp_rd_bank = cv_bank;
  assign pp_rd_pair = (cc.conv_mode == CONV_DFT) ? g_cnt : (g_cnt >> 1);
  assign pp_rd_nblk = nb_cnt;
  assign cv_mode    = cc.conv_mode;
  assign rq_conv    = cc.rq_cv;

  assign cvw_rd_en   = (cs == C_WFETCH) && !wf_phase;
  assign cvw_rd_addr = cc.c_wword;
  assign cvb_rd_en   = (cs == C_WFETCH) && !wf_phase;
  assign cvb_rd_addr = cc.c_bword;
  assign cv_wb_capture = (cs == C_WFETCH) && wf_phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs <= C_IDLE; cc <= '0; pend_cfg <= '0;
      cv_active <= 1'b0; cv_pend <= 1'b0; cv_bank <= 1'b0; pend_bank <= 1'b0;
      g_cnt <= '0; nb_cnt <= '0; issued <= '0; written <= '0; wf_phase <= 1'b0;
      cv_in_valid <= 1'b0; cv_odd <= 1'b0; cv_in_tag <= '0; conv_done_p <= 1'b0;
    end else begin
      conv_done_p <= 1'b0;
      cv_in_valid <= issue;
      cv_odd      <= (cc.conv_mode == CONV_DEMOD) && g_cnt[0];
      cv_in_tag   <= TAGW'({c_last, g_cnt, nb_cnt});
      if (handoff) begin
        if (cs == C_IDLE && !cv_pend) begin
          cc <= lc; cv_bank <= ~wr_bank; cv_active <= 1'b1;
          cs <= C_WFETCH; wf_phase <= 1'b0;
        end else begin
          pend_cfg <= lc; pend_bank <= ~wr_bank; cv_pend <= 1'b1;
        end
      end
      unique case (cs)
        C_IDLE: begin
          if (cv_pend && !handoff) begin
            cc <= pend_cfg; cv_bank <= pend_bank; cv_pend <= 1'b0; cv_active <= 1'b1;
            cs <= C_WFETCH; wf_phase <= 1'b0;
          end
        end
        C_WFETCH: begin
          wf_phase <= ~wf_phase;
          if (wf_phase) begin
            cs <= C_RUN; g_cnt <= '0; nb_cnt <= '0; issued <= '0; written <= '0;
          end
        end
        C_RUN: begin
          if (issue) begin
            issued <= issued + 1'b1;
            if (c_last) cs <= C_DRAIN;
            else if (nb_cnt == cc.c_nblk - 1'b1) begin
              nb_cnt <= '0; g_cnt <= g_cnt + 1'b1;
            end else nb_cnt <= nb_cnt + 1'b1;
          end
        end
        C_DRAIN: begin
          if (written == total) begin
            cs <= C_IDLE; cv_active <= 1'b0; conv_done_p <= 1'b1;
          end
        end
        default: cs <= C_IDLE;
      endcase
      if (cv_out_valid) written <= written + 1'b1;
    end
  end

  assign conv_busy = cv_active;

  // ---------------------------------------------------------------- Conv1D result routing
  logic [7:0] o_g, o_nb;
  logic       o_last;
  assign {o_last, o_g, o_nb} = cv_out_tag[16:0];

  always_comb begin
    out_push = cv_out_valid && !cc.conv_to_act;
    out_last = o_last;
    cw_en    = cv_out_valid && cc.conv_to_act;
    cw_k     = 16'(32'(o_g) * 32'(cc.c_sym_len) + 32'(o_nb) * LANES);
    cw_lane  = cc.c_lane;
  end

endmodule

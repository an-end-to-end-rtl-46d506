// axil_regs: the DDNA controller's register file on the general-purpose (GP) AXI4-Lite port.
//
// The processor configures each launch here (Algorithm 1, step 1.1) and polls the status bits.
// Data registers hold the requantization factors (m, n) of each Linear layer and of the Conv1D
// layer; control registers hold the launch geometry, the module modes and the data routing;
// status bits array_done, conv_done and recv_done are set by the hardware and pulled low by the
// processor writing 0 (a hardware set in the same cycle wins). start_signal is CTRL bit 0; the
// sequencer starts on its rising edge. The register names follow the paper's description; the
// map itself (see ddna_pkg) and the AXI4-Lite protocol choice are this design's.
//
// AXI4-Lite: a write is taken when AWVALID and WVALID are both high and no response is pending;
// BRESP is OKAY one cycle later. A read answers one cycle after ARVALID. Byte strobes are
// ignored (32-bit accesses only).
module axil_regs
  import ddna_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to the sequencer
  output cfg_t        cfg,
  output logic        start_signal,
  output ld_target_e  ld_target,
  output logic [15:0] ld_addr,
  output logic        ld_addr_wr,     // pulses when REG_LOAD is written
  // from the sequencer / output path
  input  logic        set_array_done,
  input  logic        set_conv_done,
  input  logic        set_recv_done,
  input  logic [31:0] cycles
);

  logic [31:0] r_ctrl, r_lk, r_lgeom, r_lact, r_lwb, r_rq1, r_rq2, r_rqc, r_cgeom, r_cwb, r_crs, r_load;
  logic [2:0]  r_status;
  logic        wr_fire, rd_fire;

  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;
  assign rd_fire   = s_arvalid && !s_rvalid;
  assign s_arready = rd_fire;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ctrl <= '0; r_lk <= '0; r_lgeom <= '0; r_lact <= '0; r_lwb <= '0;
      r_rq1 <= '0; r_rq2 <= '0; r_rqc <= '0; r_cgeom <= '0; r_cwb <= '0; r_crs <= '0;
      r_load <= '0; r_status <= '0; s_bvalid <= 1'b0; ld_addr_wr <= 1'b0;
    end else begin
      ld_addr_wr <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          REG_CTRL:   r_ctrl   <= s_wdata;
          REG_STATUS: r_status <= s_wdata[2:0];
          REG_L_K:    r_lk     <= s_wdata;
          REG_L_GEOM: r_lgeom  <= s_wdata;
          REG_L_ACT:  r_lact   <= s_wdata;
          REG_L_WB:   r_lwb    <= s_wdata;
          REG_RQ_L1:  r_rq1    <= s_wdata;
          REG_RQ_L2:  r_rq2    <= s_wdata;
          REG_RQ_CV:  r_rqc    <= s_wdata;
          REG_C_GEOM: r_cgeom  <= s_wdata;
          REG_C_WB:   r_cwb    <= s_wdata;
          REG_C_RS:   r_crs    <= s_wdata;
          REG_LOAD:   begin r_load <= s_wdata; ld_addr_wr <= 1'b1; end
          default: ;
        endcase
      end
      if (set_array_done) r_status[0] <= 1'b1;
      if (set_conv_done)  r_status[1] <= 1'b1;
      if (set_recv_done)  r_status[2] <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_fire) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr)
          REG_CTRL:   s_rdata <= r_ctrl;
          REG_STATUS: s_rdata <= {29'd0, r_status};
          REG_L_K:    s_rdata <= r_lk;
          REG_L_GEOM: s_rdata <= r_lgeom;
          REG_L_ACT:  s_rdata <= r_lact;
          REG_L_WB:   s_rdata <= r_lwb;
          REG_RQ_L1:  s_rdata <= r_rq1;
          REG_RQ_L2:  s_rdata <= r_rq2;
          REG_RQ_CV:  s_rdata <= r_rqc;
          REG_C_GEOM: s_rdata <= r_cgeom;
          REG_C_WB:   s_rdata <= r_cwb;
          REG_C_RS:   s_rdata <= r_crs;
          REG_LOAD:   s_rdata <= r_load;
          REG_CYCLES: s_rdata <= cycles;
          default:    s_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end

  always_comb begin
    cfg.conv_en     = r_ctrl[1];
    cfg.conv_mode   = conv_mode_e'(r_ctrl[2]);
    cfg.conv_to_act = r_ctrl[3];
    cfg.two_layers  = r_ctrl[4];
    cfg.k_len       = r_lk[15:0];
    cfg.k_blocks    = r_lgeom[7:0];
    cfg.n_blocks    = r_lgeom[15:8];
    cfg.dst_nblk    = r_lgeom[23:16];
    cfg.act_base1   = r_lact[15:0];
    cfg.act_base2   = r_lact[31:16];
    cfg.w_base      = r_lwb[15:0];
    cfg.b_base      = r_lwb[31:16];
    cfg.rq_l1       = rq_t'(r_rq1[20:0]);
    cfg.rq_l2       = rq_t'(r_rq2[20:0]);
    cfg.rq_cv       = rq_t'(r_rqc[20:0]);
    cfg.c_groups    = r_cgeom[7:0];
    cfg.c_nblk      = r_cgeom[15:8];
    cfg.c_lane      = r_cgeom[23:16];
    cfg.c_wword     = r_cwb[15:0];
    cfg.c_bword     = r_cwb[31:16];
    cfg.c_sym_len   = r_crs[15:0];
  end

  assign start_signal = r_ctrl[0];
  assign ld_target    = ld_target_e'(r_load[1:0]);
  assign ld_addr      = r_load[31:16];

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule

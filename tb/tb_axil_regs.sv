// tb_axil_regs: self-checking test of the AXI4-Lite register file.
//
// Writes random values to every configuration register and reads them back; checks the decoded
// launch settings (cfg fields), the start_signal level (CTRL bit 0), the ld_addr_wr pulse and
// DMA target/address of REG_LOAD, the CYCLES input, and the status bits: set by hardware pulses,
// cleared by a processor write of 0, with a hardware set winning over a clear in the same cycle.
// Write responses come one cycle after AWVALID/WVALID, read data one cycle after ARVALID.
module tb_axil_regs;
  import ddna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [7:0] s_awaddr = '0, s_araddr = '0;
  logic s_awvalid = 1'b0, s_wvalid = 1'b0, s_bready = 1'b1, s_arvalid = 1'b0, s_rready = 1'b1;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [31:0] s_wdata = '0, s_rdata;
  logic [1:0] s_bresp, s_rresp;
  cfg_t cfg;
  logic start_signal, ld_addr_wr;
  ld_target_e ld_target;
  logic [15:0] ld_addr;
  logic set_array_done = 1'b0, set_conv_done = 1'b0, set_recv_done = 1'b0;
  logic [31:0] cycles = '0;
  axil_regs dut (.*);
  int checks = 0, failures = 0;
  int n_ld_pulse = 0;

  always @(posedge clk) if (ld_addr_wr) n_ld_pulse++;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("%s", msg); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1'b1; s_wdata = d; s_wvalid = 1'b1;
    @(negedge clk);
    s_awvalid = 1'b0; s_wvalid = 1'b0;
    chk(s_bvalid && s_bresp == 2'b00, "no OKAY write response one cycle after the write");
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1'b1;
    @(negedge clk);
    s_arvalid = 1'b0;
    chk(s_rvalid && s_rresp == 2'b00, "no read data one cycle after the address");
    d = s_rdata;
  endtask

  localparam logic [7:0] DATA_REGS [11] = '{REG_L_K, REG_L_GEOM, REG_L_ACT, REG_L_WB, REG_RQ_L1,
    REG_RQ_L2, REG_RQ_CV, REG_C_GEOM, REG_C_WB, REG_C_RS, REG_LOAD};

  initial begin
    logic [31:0] v [11];
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < 11; i++) begin v[i] = $urandom; wr(DATA_REGS[i], v[i]); end
      for (int i = 0; i < 11; i++) begin rd(DATA_REGS[i], d); chk(d == v[i], $sformatf("reg %0h read %0h exp %0h", DATA_REGS[i], d, v[i])); end
      chk(cfg.k_len == v[0][15:0] && cfg.k_blocks == v[1][7:0] && cfg.n_blocks == v[1][15:8]
          && cfg.dst_nblk == v[1][23:16], "L_K / L_GEOM decode");
      chk(cfg.act_base1 == v[2][15:0] && cfg.act_base2 == v[2][31:16], "L_ACT decode");
      chk(cfg.w_base == v[3][15:0] && cfg.b_base == v[3][31:16], "L_WB decode");
      chk(cfg.rq_l1 == v[4][20:0] && cfg.rq_l2 == v[5][20:0] && cfg.rq_cv == v[6][20:0], "RQ decode");
      chk(cfg.c_groups == v[7][7:0] && cfg.c_nblk == v[7][15:8] && cfg.c_lane == v[7][23:16], "C_GEOM decode");
      chk(cfg.c_wword == v[8][15:0] && cfg.c_bword == v[8][31:16] && cfg.c_sym_len == v[9][15:0], "C_WB / C_RS decode");
      chk(ld_target == ld_target_e'(v[10][1:0]) && ld_addr == v[10][31:16], "LOAD decode");
      // CTRL
      d = 32'($urandom_range(0, 31));
      wr(REG_CTRL, d);
      chk(start_signal == d[0] && cfg.conv_en == d[1] && cfg.conv_mode == conv_mode_e'(d[2])
          && cfg.conv_to_act == d[3] && cfg.two_layers == d[4], "CTRL decode");
      // cycles input
      cycles = $urandom;
      rd(REG_CYCLES, d);
      chk(d == cycles, "CYCLES read");
    end
    chk(n_ld_pulse == 20, $sformatf("ld_addr_wr pulses %0d exp 20", n_ld_pulse));
    // status: hardware sets, processor clears
    wr(REG_STATUS, 32'd0);
    @(negedge clk) set_array_done = 1'b1; @(negedge clk) set_array_done = 1'b0;
    rd(REG_STATUS, d); chk(d == 32'd1, "array_done not set");
    @(negedge clk) set_conv_done = 1'b1; set_recv_done = 1'b1; @(negedge clk) set_conv_done = 1'b0; set_recv_done = 1'b0;
    rd(REG_STATUS, d); chk(d == 32'd7, "conv_done / recv_done not set");
    wr(REG_STATUS, 32'd0);
    rd(REG_STATUS, d); chk(d == 32'd0, "status not cleared");
    // set in the same cycle as the clearing write: set wins
    @(negedge clk);
    s_awaddr = REG_STATUS; s_awvalid = 1'b1; s_wdata = 32'd0; s_wvalid = 1'b1; set_conv_done = 1'b1;
    @(negedge clk);
    s_awvalid = 1'b0; s_wvalid = 1'b0; set_conv_done = 1'b0;
    rd(REG_STATUS, d); chk(d == 32'd2, "hardware set did not win over the clear");
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

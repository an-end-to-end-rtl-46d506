// ddna_pkg: constants and types shared by the DFT-Demodulation Net Accelerator (DDNA).
//
// The accelerator runs INT8 neural-network layers (fused Linear + BN, Conv1D + BN) for an OFDM
// receiver: DFT-Net turns one frame of F time-domain symbols of S samples into the frequency
// domain, Demod-Net turns the frequency-domain frame into two scores per bit.
//
// Numbers that follow the paper: PEA of 2kF x 16 (k = 1, F = 8 gives 16 x 16), S = 80 samples
// per symbol (N = 64 plus a 16-sample cyclic prefix), INT8 weights and activations, INT16 bias,
// per-layer requantization factor m * 2^-n held in registers. Everything else here (register
// map, bit positions, word widths, memory depths) is this implementation's own choice.
package ddna_pkg;

  // ---------------------------------------------------------------- numeric formats
  localparam int unsigned DW    = 8;   // activation / weight width (INT8)
  localparam int unsigned BW    = 16;  // bias width (INT16, scale S_in*S_w)
  localparam int unsigned ACCW  = 32;  // accumulator width inside the PEs
  localparam int unsigned MW    = 16;  // requantization multiplier m (unsigned)
  localparam int unsigned NW    = 5;   // requantization shift n

  typedef logic signed [DW-1:0]   act_t;
  typedef logic signed [BW-1:0]   bias_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // requantization factor pair (m, n) of Eq. (20)
  typedef struct packed {
    logic [NW-1:0] n;
    logic [MW-1:0] m;
  } rq_t;

  // ---------------------------------------------------------------- Buffer 4 usage per pass
  typedef enum logic [1:0] {
    BLK_SINGLE = 2'd0,  // whole K in one pass: result goes straight to quant
    BLK_FIRST  = 2'd1,  // first basic block: store partial sum in Buffer 4, no output
    BLK_MID    = 2'd2,  // middle block: Buffer 4 += result, no output
    BLK_LAST   = 2'd3   // last block: output Buffer 4 + result
  } blk_kind_e;

  // ---------------------------------------------------------------- Conv1D modes
  typedef enum logic {
    CONV_DFT   = 1'b0,  // inputs u1..u4 of Eq. (10) from both Linear layers
    CONV_DEMOD = 1'b1   // inputs [x_re, x_im, LeakyReLU(x_re), LeakyReLU(x_im)]
  } conv_mode_e;

  // ---------------------------------------------------------------- memory targets of the DMA stream
  typedef enum logic [1:0] {
    LD_ACT    = 2'd0,
    LD_WEIGHT = 2'd1,
    LD_BIAS   = 2'd2
  } ld_target_e;

  // ---------------------------------------------------------------- register map (byte addresses)
  localparam logic [7:0] REG_CTRL   = 8'h00; // [0] start_signal [1] conv_en [2] conv_mode
                                             // [3] conv_to_act (Buffer 3) [4] two_layers
  localparam logic [7:0] REG_STATUS = 8'h04; // [0] array_done [1] conv_done [2] recv_done
  localparam logic [7:0] REG_L_K    = 8'h08; // [15:0] basic-block depth K of one PEA pass
  localparam logic [7:0] REG_L_GEOM = 8'h0C; // [7:0] K blocks [15:8] column blocks [23:16] dst column block
  localparam logic [7:0] REG_L_ACT  = 8'h10; // [15:0] act base layer 1 [31:16] act base layer 2
  localparam logic [7:0] REG_L_WB   = 8'h14; // [15:0] weight base [31:16] bias base
  localparam logic [7:0] REG_RQ_L1  = 8'h18; // [15:0] m [20:16] n  (Linear layer 1)
  localparam logic [7:0] REG_RQ_L2  = 8'h1C; // same, Linear layer 2
  localparam logic [7:0] REG_RQ_CV  = 8'h20; // same, Conv1D
  localparam logic [7:0] REG_C_GEOM = 8'h24; // [7:0] row groups [15:8] column blocks [23:16] frame lane
  localparam logic [7:0] REG_C_WB   = 8'h28; // [15:0] conv weight word [31:16] conv bias word
  localparam logic [7:0] REG_C_RS   = 8'h2C; // [15:0] symbol length S (reshape address step)
  localparam logic [7:0] REG_LOAD   = 8'h30; // [1:0] DMA target [31:16] start word address
  localparam logic [7:0] REG_CYCLES = 8'h34; // read only: PEA busy cycles of the last launch

  // Settings of one launch, decoded from the registers.
  typedef struct packed {
    logic        conv_en;
    conv_mode_e  conv_mode;
    logic        conv_to_act;
    logic        two_layers;
    logic [15:0] k_len;
    logic [7:0]  k_blocks;
    logic [7:0]  n_blocks;
    logic [7:0]  dst_nblk;
    logic [15:0] act_base1;
    logic [15:0] act_base2;
    logic [15:0] w_base;
    logic [15:0] b_base;
    rq_t         rq_l1;
    rq_t         rq_l2;
    rq_t         rq_cv;
    logic [7:0]  c_groups;
    logic [7:0]  c_nblk;
    logic [7:0]  c_lane;
    logic [15:0] c_wword;
    logic [15:0] c_bword;
    logic [15:0] c_sym_len;
  } cfg_t;

endpackage

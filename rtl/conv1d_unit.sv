// conv1d_unit: the Conv1D unit, a 1x1 convolution mixing four input channels into two.
//
// For every sample position (LANES of them per cycle) it computes
//   y_o = sat8( requant( sum_{i=0..3} w[o][i] * x_i + b_o ) ),  o = 0, 1,
// the 2x4 mixing kernel of Eq. (11) (with BN folded into w and b), followed by its own
// quantization to INT8. The four inputs are picked by mode:
//   CONV_DFT:   x = (u1, u2, u3, u4) = channels 0..3 of the ping-pong buffer word, i.e.
//               (W_r Re y, W_r Im y, W_i Re y, W_i Im y); y_0 = Re Y, y_1 = Im Y.
//   CONV_DEMOD: x = (a, b, LeakyReLU(a), LeakyReLU(b)) with a, b the two Demod-Net Linear
//               branches of the selected frame (channel odd_row and 2 + odd_row); y_0, y_1 are
//               the two scores of each bit.
// The LeakyReLU branch on the Conv1D input follows the paper (Fig. 2(b), Fig. 7); the order of
// the four channels in the concatenation is this design's choice.
//
// Timing: in_valid with its inputs; out_valid two cycles later (one multiply-add stage, one
// requantization stage). A TAGW-bit tag travels alongside for the caller's addressing.
module conv1d_unit
  import ddna_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned TAGW  = 17
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  conv_mode_e      mode,
  input  logic            odd_row,
  input  act_t            in_ch  [4][LANES],
  input  logic [TAGW-1:0] in_tag,
  input  act_t            w      [2][4],
  input  bias_t           b      [2],
  input  rq_t             rq,
  output logic            out_valid,
  output act_t            out_y  [2][LANES],
  output logic [TAGW-1:0] out_tag
);

  act_t x [4][LANES];
  act_t lr_a [LANES], lr_b [LANES];
  act_t sel_a [LANES], sel_b [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      sel_a[i] = odd_row ? in_ch[1][i] : in_ch[0][i];
      sel_b[i] = odd_row ? in_ch[3][i] : in_ch[2][i];
    end
  end

  leaky_relu #(.LANES(LANES)) u_lr_a (.x(sel_a), .y(lr_a));
  leaky_relu #(.LANES(LANES)) u_lr_b (.x(sel_b), .y(lr_b));

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (mode == CONV_DFT) begin
        for (int c = 0; c < 4; c++) x[c][i] = in_ch[c][i];
      end else begin
        x[0][i] = sel_a[i];
        x[1][i] = sel_b[i];
        x[2][i] = lr_a[i];
        x[3][i] = lr_b[i];
      end
    end
  end

  // stage 1: multiply-accumulate over the four channels
  acc_t     s1_acc [2][LANES];
  logic     s1_valid;
  logic [TAGW-1:0] s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_tag   <= '0;
      for (int o = 0; o < 2; o++)
        for (int i = 0; i < LANES; i++) s1_acc[o][i] <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_tag   <= in_tag;
      if (in_valid)
        for (int o = 0; o < 2; o++)
          for (int i = 0; i < LANES; i++)
            s1_acc[o][i] <= acc_t'(x[0][i] * w[o][0]) + acc_t'(x[1][i] * w[o][1])
                          + acc_t'(x[2][i] * w[o][2]) + acc_t'(x[3][i] * w[o][3]);
    end
  end

  // stage 2: bias and requantization per output channel
  bias_t bias_v [2][LANES];
  logic  rq_valid [2];
  always_comb begin
    for (int o = 0; o < 2; o++)
      for (int i = 0; i < LANES; i++) bias_v[o][i] = b[o];
  end

  for (genvar o = 0; o < 2; o++) begin : g_rq
    requant #(.LANES(LANES)) u_rq (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (s1_valid),
      .in_acc   (s1_acc[o]),
      .in_bias  (bias_v[o]),
      .rq       (rq),
      .out_valid(rq_valid[o]),
      .out_q    (out_y[o])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_tag <= '0;
    else        out_tag <= s1_tag;
  end

  assign out_valid = rq_valid[0];

endmodule

// leaky_relu: INT8 LeakyReLU for LANES values, combinational.
//
// y = x for x >= 0, y = x * alpha for x < 0. The paper's Demod-Net uses alpha = 0.1 (Fig. 2(b)).
// This design approximates alpha by 13/128 = 0.1016 and rounds the negative product toward minus
// infinity (arithmetic shift), so the result stays within [-13, 127] and never overflows INT8.
module leaky_relu
  import ddna_pkg::*;
#(
  parameter int unsigned LANES     = 16,
  parameter int unsigned ALPHA_NUM = 13,  // alpha = ALPHA_NUM / 2^ALPHA_SH
  parameter int unsigned ALPHA_SH  = 7
) (
  input  act_t x [LANES],
  output act_t y [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (x[i] >= 0) y[i] = x[i];
      else           y[i] = act_t'((16'(x[i]) * $signed(16'(ALPHA_NUM))) >>> ALPHA_SH);
    end
  end
endmodule

// requant: integer-only requantization of LANES accumulators to INT8 (the "Quant." units).
//
// For each lane: q = sat8( ((acc + bias) * m + 2^(n-1)) >>> n ), the integer form of the paper's
// q_out = (S_in*S_w/S_out) * (sum q_in*q_w + bias/(S_in*S_w)) with the real factor replaced by
// m * 2^-n (Eq. (19)-(20)). The bias is INT16 at the accumulator's scale, so it is added before
// scaling, as the paper prescribes. Zero points are zero (symmetric quantization).
// This design's own choices: m is a 16-bit unsigned integer and n a 5-bit shift, the rounding is
// half-up (add 2^(n-1) before the arithmetic shift), and saturation is to [-128, 127].
//
// Interface: in_valid / in_acc / in_bias / rq in; one cycle later out_valid / out_q.
module requant
  import ddna_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  acc_t  in_acc  [LANES],
  input  bias_t in_bias [LANES],
  input  rq_t   rq,
  output logic  out_valid,
  output act_t  out_q   [LANES]
);

  function automatic act_t rq_lane(acc_t acc, bias_t bv, rq_t f);
    logic signed [63:0] s, p, rnd;
    s = 64'(acc) + 64'(bv);
    p = s * $signed({48'd0, f.m});
    rnd = (f.n == '0) ? 64'sd0 : (64'sd1 <<< (f.n - 1'b1));
    p = (p + rnd) >>> f.n;
    if (p > 64'sd127)       return act_t'(8'sd127);
    else if (p < -64'sd128) return act_t'(-8'sd128);
    else                    return act_t'(p[7:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < LANES; i++) out_q[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < LANES; i++) out_q[i] <= rq_lane(in_acc[i], in_bias[i], rq);
    end
  end

endmodule

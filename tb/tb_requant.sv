// tb_requant: self-checking test of the requantization stage.
//
// Drives random 32-bit sums (small and large, to reach both saturation limits), INT16 biases
// and random (m, n) factors into all lanes, one vector per cycle with random gaps, and compares
// each output with sat8(((acc + bias) * m + 2^(n-1)) >> n) one cycle after the input.
module tb_requant;
  import ddna_pkg::*;
  localparam int unsigned LANES = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic  in_valid = 1'b0, out_valid;
  acc_t  in_acc [LANES];
  bias_t in_bias [LANES];
  rq_t   rq;
  act_t  out_q [LANES];
  requant #(.LANES(LANES)) dut (.*);
  int checks = 0, failures = 0;
  int exp_q [$];   // LANES entries per expected vector
  int ev;

  function automatic int model(longint acc, longint bv, longint m, int n);
    longint p;
    p = (acc + bv) * m;
    if (n > 0) p = p + (longint'(1) <<< (n - 1));
    p = p >>> n;
    return (p > 127) ? 127 : (p < -128) ? -128 : int'(p);
  endfunction

  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        for (int i = 0; i < LANES; i++) begin
          ev = exp_q.pop_front();
          checks++;
          if (int'(out_q[i]) != ev) begin
            failures++;
            if (failures < 10) $display("lane %0d got %0d exp %0d", i, out_q[i], ev);
          end
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < LANES; i++) begin in_acc[i] = '0; in_bias[i] = '0; end
    rq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      rq.m = MW'($urandom_range(0, (t % 3 == 0) ? 65535 : 64));
      rq.n = NW'($urandom_range(0, 31));
      for (int i = 0; i < LANES; i++) begin
        in_acc[i]  = (i % 2) ? acc_t'($urandom) : acc_t'($signed($urandom_range(0, 8191)) - 4096);
        in_bias[i] = bias_t'($urandom);
      end
      if (in_valid)
        for (int i = 0; i < LANES; i++)
          exp_q.push_back(model(longint'(in_acc[i]), longint'(in_bias[i]), longint'(rq.m), int'(rq.n)));
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

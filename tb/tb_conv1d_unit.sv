// tb_conv1d_unit: self-checking test of the Conv1D unit (2x4 mixing, kernel size 1).
//
// Random input channels, kernels, biases and (m, n) factors in both modes, one input per cycle
// with random gaps. DFT mode mixes channels 0..3; Demod mode mixes (a, b, LeakyReLU(a),
// LeakyReLU(b)) with a, b taken from channels odd_row and 2 + odd_row. Each output, with its
// tag, is checked exactly two cycles after its input.
module tb_conv1d_unit;
  import ddna_pkg::*;
  localparam int unsigned LANES = 16, TAGW = 17;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, odd_row = 1'b0, out_valid;
  conv_mode_e mode = CONV_DFT;
  act_t in_ch [4][LANES];
  logic [TAGW-1:0] in_tag = '0, out_tag;
  act_t w [2][4];
  bias_t b [2];
  rq_t rq;
  act_t out_y [2][LANES];
  conv1d_unit #(.LANES(LANES), .TAGW(TAGW)) dut (.*);
  int checks = 0, failures = 0;

  typedef struct { int y [2][LANES]; logic [TAGW-1:0] tag; } exp_t;
  exp_t pipe [$];
  exp_t e;
  logic v_d1, v_d2;

  function automatic int sat_rq(longint s, int m, int n);
    longint p;
    p = s * m;
    if (n > 0) p += longint'(1) <<< (n - 1);
    p = p >>> n;
    return (p > 127) ? 127 : (p < -128) ? -128 : int'(p);
  endfunction
  function automatic int lrelu(int v);
    return (v >= 0) ? v : ((v * 13) >>> 7);
  endfunction

  initial begin
    for (int c = 0; c < 4; c++) for (int i = 0; i < LANES; i++) in_ch[c][i] = '0;
    for (int o = 0; o < 2; o++) begin b[o] = '0; for (int i = 0; i < 4; i++) w[o][i] = '0; end
    rq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    v_d1 = 1'b0; v_d2 = 1'b0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      // output of the input two cycles back
      checks++;
      if (out_valid !== v_d2) begin failures++; $display("out_valid %0b exp %0b", out_valid, v_d2); end
      else if (v_d2) begin
        e = pipe.pop_front();
        checks++;
        if (out_tag !== e.tag) failures++;
        for (int o = 0; o < 2; o++) for (int i = 0; i < LANES; i++) begin
          checks++;
          if (int'(out_y[o][i]) != e.y[o][i]) begin
            failures++;
            if (failures < 10) $display("y%0d lane %0d got %0d exp %0d", o, i, out_y[o][i], e.y[o][i]);
          end
        end
      end
      v_d2 = v_d1;
      // new input; weights change only every 50 cycles (they are held per launch)
      if (t % 50 == 0) begin
        for (int o = 0; o < 2; o++) begin b[o] = bias_t'($urandom_range(0, 2000)) - 16'sd1000; for (int i = 0; i < 4; i++) w[o][i] = act_t'($urandom); end
        rq.m = MW'($urandom_range(1, 8)); rq.n = NW'($urandom_range(4, 9));
        mode = conv_mode_e'((t / 50) % 2);
      end
      in_valid = ($urandom % 3) != 0 && (t % 50 < 48);   // pipeline empty before a change
      odd_row = $urandom % 2;
      in_tag = TAGW'($urandom);
      for (int c = 0; c < 4; c++) for (int i = 0; i < LANES; i++) in_ch[c][i] = act_t'($urandom);
      v_d1 = in_valid;
      if (in_valid) begin
        exp_t n;
        n.tag = in_tag;
        for (int i = 0; i < LANES; i++) begin
          int x [4];
          if (mode == CONV_DFT) for (int c = 0; c < 4; c++) x[c] = in_ch[c][i];
          else begin
            x[0] = in_ch[odd_row ? 1 : 0][i]; x[1] = in_ch[odd_row ? 3 : 2][i];
            x[2] = lrelu(x[0]); x[3] = lrelu(x[1]);
          end
          for (int o = 0; o < 2; o++) begin
            longint s;
            s = b[o];
            for (int c = 0; c < 4; c++) s += longint'(x[c]) * longint'(w[o][c]);
            n.y[o][i] = sat_rq(s, int'(rq.m), int'(rq.n));
          end
        end
        pipe.push_back(n);
      end
    end
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

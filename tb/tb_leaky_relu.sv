// tb_leaky_relu: exhaustive self-checking test of the LeakyReLU lanes.
//
// Applies all 256 INT8 values (spread over the lanes, lane i gets value v + i) and compares with
// y = x for x >= 0 and y = floor(13 x / 128) for x < 0. The block is combinational; outputs
// are sampled 1 time unit after each input change.
module tb_leaky_relu;
  import ddna_pkg::*;
  localparam int unsigned LANES = 16;
  act_t x [LANES], y [LANES];
  leaky_relu #(.LANES(LANES)) dut (.x, .y);
  int checks = 0, failures = 0;

  function automatic int model(int v);
    return (v >= 0) ? v : ((v * 13) >>> 7);
  endfunction

  initial begin
    for (int v = -128; v < 128; v++) begin
      for (int i = 0; i < LANES; i++) x[i] = act_t'(v + i);
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (int'(y[i]) != model(int'(x[i]))) begin
          failures++;
          if (failures < 10) $display("x=%0d got %0d exp %0d", x[i], y[i], model(int'(x[i])));
        end
      end
    end
    // a few random vectors as well
    repeat (50) begin
      for (int i = 0; i < LANES; i++) x[i] = act_t'($urandom);
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (int'(y[i]) != model(int'(x[i]))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

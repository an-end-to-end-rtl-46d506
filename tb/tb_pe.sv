// tb_pe: self-checking test of one processing element.
//
// Streams random matrix passes of random depth K >= 2 back to back into a single PE (activation,
// valid, last; weight) and checks: the activation, flags and weight appear on the outputs one
// cycle later; after the "last" element the finished dot product is in MAC reg2 (rd_out) and
// `loaded` pulses, two cycles after the last input; the next pass starts from zero in the very
// next cycle (reg1 cleared); and with rd_shift high reg2 takes rd_in (the column readout chain).
module tb_pe;
  import ddna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  act_t a_in = '0, a_out, w_in = '0, w_out;
  logic a_valid_in = 1'b0, a_last_in = 1'b0, a_valid_out, a_last_out;
  logic rd_shift = 1'b0, loaded;
  acc_t rd_in = '0, rd_out;
  pe dut (.*);
  int checks = 0, failures = 0;
  act_t pa, pw; logic pv, pl;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("%s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 200; p++) begin
      int K;
      longint s;
      K = $urandom_range(2, 40);
      s = 0;
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        a_in = act_t'($urandom); w_in = act_t'($urandom);
        a_valid_in = 1'b1; a_last_in = (k == K - 1);
        s += longint'(a_in) * longint'(w_in);
        pa = a_in; pw = w_in; pv = a_valid_in; pl = a_last_in;
        @(posedge clk); #1;
        chk(a_out == pa && w_out == pw && a_valid_out == pv && a_last_out == pl, "pass-through registers wrong");
        chk(!loaded, "loaded too early");
      end
      // the product of the last element lands in reg2 one edge later
      @(negedge clk);
      if (p % 2 == 0) begin
        a_valid_in = 1'b0; a_last_in = 1'b0;
      end else begin
        // back to back: first element of a dummy pass that is then dropped
        a_valid_in = 1'b0; a_last_in = 1'b0;
      end
      @(posedge clk); #1;
      chk(loaded, "loaded did not pulse");
      chk(rd_out == acc_t'(s), $sformatf("reg2 %0d exp %0d", rd_out, acc_t'(s)));
      // shift chain: reg2 takes rd_in
      @(negedge clk);
      rd_shift = 1'b1; rd_in = acc_t'($urandom);
      pw = w_in;
      @(posedge clk); #1;
      chk(rd_out == rd_in, "reg2 did not take rd_in while shifting");
      chk(!loaded, "loaded while shifting");
      @(negedge clk);
      rd_shift = 1'b0;
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

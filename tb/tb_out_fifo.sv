// tb_out_fifo: self-checking test of the output FIFO (sharing buffer to the HP port).
//
// A producer pushes random beats only when `space` is nonzero (as the Conv1D engine does), the
// consumer takes beats with random tready. Checks order and data of every beat, `space` against
// a reference count, that a beat stays stable while not taken, and that recv_done pulses once,
// in the cycle after the beat marked tlast has been taken.
module tb_out_fifo;
  localparam int unsigned WIDTH = 256, DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push = 1'b0, push_last = 1'b0, m_tvalid, m_tready = 1'b0, m_tlast, recv_done;
  logic [WIDTH-1:0] push_data = '0, m_tdata;
  logic [$clog2(DEPTH):0] space;
  out_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  logic [WIDTH:0] q [$];
  int count = 0, n_pushed = 0, n_recv = 0;
  logic exp_done = 1'b0;
  localparam int NBEATS = 3000;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (recv_done !== exp_done) begin failures++; $display("recv_done %0b exp %0b", recv_done, exp_done); end
      exp_done = 1'b0;
      checks++;
      if (int'(space) != DEPTH - count) begin failures++; if (failures < 10) $display("space %0d exp %0d", space, DEPTH - count); end
      if (m_tvalid && m_tready) begin
        logic [WIDTH:0] e;
        e = q.pop_front();
        checks++;
        if ({m_tlast, m_tdata} !== e) begin failures++; if (failures < 10) $display("beat mismatch"); end
        exp_done = m_tlast;
        if (m_tlast) n_recv++;
        count--;
      end
      if (push) begin q.push_back({push_last, push_data}); count++; end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    while (n_pushed < NBEATS) begin
      @(negedge clk);
      m_tready = (n_pushed < NBEATS / 2) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      push = (space != 0) && ($urandom % 3 != 0);
      push_data = {8{$urandom}};
      push_last = push && ((n_pushed % 500) == 499);
      if (push) n_pushed++;
    end
    @(negedge clk) push = 1'b0; push_last = 1'b0; m_tready = 1'b1;
    repeat (DEPTH + 3) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_recv != NBEATS / 500) begin failures++; $display("left %0d, recv %0d", q.size(), n_recv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

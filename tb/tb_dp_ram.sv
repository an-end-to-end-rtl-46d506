// tb_dp_ram: self-checking test of the parameter memory (one write port, two read ports).
//
// Writes random words to random addresses while both read ports read random addresses; each
// read result is compared one cycle later with a reference copy (read-before-write on the same
// address returns the old word, the registered-read behaviour of a block RAM).
module tb_dp_ram;
  localparam int unsigned WIDTH = 128;
  localparam int unsigned DEPTH = 4096;
  localparam int unsigned AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 1'b0, re_a = 1'b0, re_b = 1'b0;
  logic [AW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [WIDTH-1:0] wdata = '0, rdata_a, rdata_b;
  dp_ram #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_m [DEPTH];
  logic [WIDTH-1:0] ea, eb;
  logic va, vb;

  function automatic logic [WIDTH-1:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    // fill everything once so every read has a defined reference
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1'b1; waddr = AW'(a); wdata = rnd(); ref_m[a] = wdata;
    end
    va = 1'b0; vb = 1'b0;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (va) begin checks++; if (rdata_a !== ea) begin failures++; if (failures < 10) $display("port a mismatch"); end end
      if (vb) begin checks++; if (rdata_b !== eb) begin failures++; if (failures < 10) $display("port b mismatch"); end end
      re_a = $urandom % 2; re_b = $urandom % 2;
      raddr_a = AW'($urandom_range(0, 63)); raddr_b = AW'($urandom_range(0, DEPTH - 1));
      va = re_a; vb = re_b;
      ea = ref_m[raddr_a]; eb = ref_m[raddr_b];
      we = $urandom % 2; waddr = AW'($urandom_range(0, 63)); wdata = rnd();
      if (we) ref_m[waddr] = wdata;
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

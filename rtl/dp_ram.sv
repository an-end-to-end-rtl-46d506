// dp_ram: on-chip parameter memory (weight memory and bias memory of the accelerator).
//
// One write port, used by the DMA stream, and two independent read ports: the PEA feed and the
// Conv1D weight fetch use the weight memory, the quantization stage and the Conv1D bias fetch use
// the bias memory. Reads are registered (data one cycle after the enable), so the array maps to
// block RAM. The paper keeps weights in DDR and moves them on chip per pipeline round; the depth
// here (a few basic blocks, so one round can load while another computes) is this design's choice.
module dp_ram #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  output logic [WIDTH-1:0]         rdata_a,
  input  logic                     re_b,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output logic [WIDTH-1:0]         rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end
  always_ff @(posedge clk) begin
    if (re_a) rdata_a <= mem[raddr_a];
  end
  always_ff @(posedge clk) begin
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule

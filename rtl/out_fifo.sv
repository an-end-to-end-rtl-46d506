// out_fifo: the output side of the sharing buffer, streaming results to the HP port.
//
// Conv1D results (two channels of LANES INT8 values per entry) are queued here and leave as an
// AXI4-Stream towards the DMA engine, which writes them to DDR. The entry that ends a launch
// carries tlast; when that beat has been accepted, recv_done pulses, which the controller turns
// into the recv_done status bit polled by the processor (Algorithm 1, step 2.3.4). The producer
// looks at `space` (free entries) and stops issuing when it is too low: a full FIFO stalls the
// Conv1D engine. The paper names the sharing buffer and the DMA path only; FIFO, AXI4-Stream and
// depth are this design's choices.
//
// Timing: an entry pushed in one cycle can leave in the next (registered read side).
module out_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [WIDTH-1:0]       push_data,
  input  logic                   push_last,
  output logic [$clog2(DEPTH):0] space,
  output logic                   m_tvalid,
  input  logic                   m_tready,
  output logic [WIDTH-1:0]       m_tdata,
  output logic                   m_tlast,
  output logic                   recv_done
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH:0]   mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [AW:0]      count;
  logic             pop;

  assign pop      = m_tvalid && m_tready;
  assign m_tvalid = (count != '0);
  assign {m_tlast, m_tdata} = mem[rp];
  assign space    = (AW+1)'(DEPTH) - count;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= {push_last, push_data};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0; recv_done <= 1'b0;
    end else begin
      recv_done <= pop && m_tlast;
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(push && !pop && count == (AW+1)'(DEPTH)));
  // AXI4-Stream: once offered, a beat stays offered and unchanged until taken
  a_axis_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tlast));
endmodule

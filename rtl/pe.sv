// pe: one processing element of the output-stationary systolic array (PEA).
//
// The PE holds a weight register and an activation register. Every cycle in which the registered
// activation is valid, it multiplies activation by weight (INT8 x INT8) and adds the product to
// MAC reg1. The activation, with its valid and last flags, moves on to the PE on the right; the
// weight moves on to the PE below. When the activation marked "last" of a matrix pass arrives,
// the final sum is steered by the MUX into MAC reg2 and MAC reg1 is cleared, so the next pass
// can start accumulating in the very next cycle while reg2 waits to be read out. This is the
// two-result-register PE of the paper's data-merge scheme; the flag signalling and widths are
// this design's own.
//
// Readout: reg2 forms a shift chain up the column. With rd_shift high, reg2 takes the reg2 value
// of the PE below (rd_in) and presents its own value to the PE above (rd_out). A load has
// priority over a shift; the array controller guarantees they never meet (pass depth K >= 2*ROWS).
//
// Timing: inputs are registered (1 cycle to a_out/w_out); the MAC result lands in reg1/reg2 at the
// clock edge after the operands sit in the registers.
module pe
  import ddna_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  // activation path (left to right)
  input  act_t  a_in,
  input  logic  a_valid_in,
  input  logic  a_last_in,
  output act_t  a_out,
  output logic  a_valid_out,
  output logic  a_last_out,
  // weight path (top to bottom)
  input  act_t  w_in,
  output act_t  w_out,
  // result readout chain (bottom to top)
  input  logic  rd_shift,
  input  acc_t  rd_in,
  output acc_t  rd_out,
  // pulses when this PE loads a finished result into reg2
  output logic  loaded
);

  act_t act_reg, w_reg;
  logic v_reg, l_reg;
  acc_t mac_reg1, mac_reg2;
  acc_t sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_reg <= '0;
      w_reg   <= '0;
      v_reg   <= 1'b0;
      l_reg   <= 1'b0;
    end else begin
      act_reg <= a_in;
      w_reg   <= w_in;
      v_reg   <= a_valid_in;
      l_reg   <= a_valid_in & a_last_in;
    end
  end

  // multiplier and adder in front of the MUX
  assign sum = mac_reg1 + acc_t'(act_reg * w_reg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_reg1 <= '0;
      mac_reg2 <= '0;
      loaded   <= 1'b0;
    end else begin
      loaded <= 1'b0;
      if (v_reg && l_reg) begin
        mac_reg2 <= sum;      // finished result to reg2
        mac_reg1 <= '0;       // reg1 cleared for the next matrix
        loaded   <= 1'b1;
      end else begin
        if (v_reg) mac_reg1 <= sum;
        if (rd_shift) mac_reg2 <= rd_in;
      end
    end
  end

  // a finished result must never arrive while the column is shifting its results out
  a_no_load_during_shift: assert property (@(posedge clk) disable iff (!rst_n)
    !(v_reg && l_reg && rd_shift));

  assign a_out       = act_reg;
  assign a_valid_out = v_reg;
  assign a_last_out  = l_reg;
  assign w_out       = w_reg;
  assign rd_out      = mac_reg2;

endmodule

// tm_automaton: one Tsetlin automaton (TA) with fault-injection gates.
// The TA is a saturating counter over 2**STATE_BITS states. States in the
// lower half mean "exclude", the upper half "include"; the action is the
// counter's top bit. inc moves the state towards (deeper) include, dec
// towards exclude; both saturate at the end states. A penalty in one of the
// two middle states therefore flips the action.
// Fault injection (as described for the design): the action is ANDed with
// and_mask and ORed with or_mask, so and_mask=0 forces a stuck-at-0 and
// or_mask=1 a stuck-at-1. Fault-free operation is and_mask=1, or_mask=0.
// Own choices: reset and clear put the TA in the last exclude state
// (2**(STATE_BITS-1)-1); en is a clock enable standing in for the clock
// gating used on the FPGA. Timing: the state changes on the clock edge
// after inc/dec; the include action is combinational from the state.
module tm_automaton #(
  parameter int unsigned STATE_BITS = tm_pkg::STATE_BITS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,     // synchronous return to the initial state
  input  logic en,        // clock enable
  input  logic inc,
  input  logic dec,
  input  logic and_mask,
  input  logic or_mask,
  output logic incl,   // action after fault gating
  output logic incl_raw
);
  localparam logic [STATE_BITS-1:0] INIT = {1'b0, {(STATE_BITS-1){1'b1}}};
  localparam logic [STATE_BITS-1:0] MAXS = '1;
  logic [STATE_BITS-1:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           state <= INIT;
    else if (clear)       state <= INIT;
    else if (en) begin
      if (inc && !dec && state != MAXS)   state <= state + 1'b1;
      else if (dec && !inc && state != '0) state <= state - 1'b1;
    end
  end

  assign incl_raw = state[STATE_BITS-1];
  assign incl     = (incl_raw & and_mask) | or_mask;
endmodule

// pec_clock_gate: clock gate for one block of the controller.
//
// The block's clock is the system clock ANDed with a clock-gating signal from
// the control unit, so the block sees no clock edge (and its clock net does
// not toggle) while it is idle. The AND gate is the original's. The enable is
// held in a latch that is transparent while clk is low; this keeps a change
// of the enable during the high phase from chopping the clock. The latch is
// this design's choice and is the intended latch of this module.
//
// Interface: clk, en (from the control unit, settled before the rising edge),
// gclk (gated clock). Timing: gclk follows clk with the enable sampled while
// clk is low; one gate delay.
module pec_clock_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_latched;

  always_latch begin
    if (!clk) en_latched = en;
  end

  assign gclk = clk & en_latched;
endmodule

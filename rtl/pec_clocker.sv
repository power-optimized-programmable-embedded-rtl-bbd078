// pec_clocker: behavioural model of the on-chip programmable oscillator
// (the "clocker"). Not synthesizable: it stands for a hardwired ring
// oscillator and uses delays.
//
// The frequency is set by the 4-bit control word held in the dedicated
// register r_osc, which is loaded from rosc_din on a rising edge of
// rosc_wr. Control word 0 gives the lowest frequency, 44 MHz, and 15 the
// highest, 134 MHz; in between the period falls linearly with the control
// word. The end frequencies, the 4-bit word and r_osc are the original's;
// the linear law (the original shows a measured, nearly linear curve), the
// reset value of r_osc (0) and the polarity of start_stop (1 runs, 0 holds
// clk low) are this model's. The output starts low and toggles every half
// period while start_stop is high.
module pec_clocker #(
  parameter int unsigned F_MIN_KHZ = 44_000,
  parameter int unsigned F_MAX_KHZ = 134_000
) (
  input  logic       start_stop,
  input  logic       rosc_wr,
  input  logic [3:0] rosc_din,
  output logic [3:0] r_osc,
  output logic       clk
);
  // periods in picoseconds
  localparam int unsigned T_MAX_PS = 1_000_000_000 / F_MIN_KHZ;
  localparam int unsigned T_MIN_PS = 1_000_000_000 / F_MAX_KHZ;
  int unsigned half_ps;

  initial r_osc = 4'd0;
  always @(posedge rosc_wr) r_osc <= rosc_din;

  always_comb
    half_ps = (T_MAX_PS - (T_MAX_PS - T_MIN_PS) * 32'(r_osc) / 15) / 2;

  initial clk = 1'b0;

  always begin
    if (start_stop) begin
      #(half_ps * 1ps) clk = 1'b1;
      #(half_ps * 1ps) clk = 1'b0;
    end else begin
      clk = 1'b0;
      @(posedge start_stop);
    end
  end
endmodule

// pec_top: chip top of the programmable embedded controller.
//
// The on-chip clocker generates the system clock, whose frequency is set
// through the 4-bit control word r_osc (rosc_din, loaded on a rising edge
// of rosc_wr), and the controller core runs from it. start_stop runs or
// stops the oscillator. The remaining pins are the controller's: reset,
// port 0 (out), port 1 (in), the seven segments {g,f,e,d,c,b,a}, the UART's
// tx/rx, and the eight clock-gating signals for observation.
//
// The clocker is a behavioural model (delays), so this top simulates but
// only pec_core is synthesizable logic; a chip would put its oscillator
// in pec_clocker's place. Parameters default to the original's sizes.
module pec_top
  import pec_pkg::*;
#(
  parameter int unsigned ROM_WORDS         = 128,
  parameter int unsigned RAM_WORDS         = 1024,
  parameter int unsigned PORT_W            = 8,
  parameter int unsigned UART_CLKS_PER_BIT = 868,
  parameter rom_image_t  ROM_IMAGE         = demo_rom()
) (
  input  logic              start_stop,
  input  logic              rosc_wr,
  input  logic [3:0]        rosc_din,
  output logic [3:0]        r_osc,
  output logic              sys_clk,
  input  logic              reset,
  input  logic [PORT_W-1:0] port1_pins,
  output logic [PORT_W-1:0] port0_pins,
  output logic [6:0]        seg,
  output logic              tx,
  input  logic              rx,
  output clkgat_t           clkgat
);
  pec_clocker u_clocker (
    .start_stop, .rosc_wr, .rosc_din, .r_osc, .clk(sys_clk)
  );

  pec_core #(
    .ROM_WORDS(ROM_WORDS), .RAM_WORDS(RAM_WORDS), .PORT_W(PORT_W),
    .UART_CLKS_PER_BIT(UART_CLKS_PER_BIT), .ROM_IMAGE(ROM_IMAGE)
  ) u_core (
    .clk(sys_clk), .reset, .port1_pins, .port0_pins, .seg, .tx, .rx, .clkgat
  );
endmodule

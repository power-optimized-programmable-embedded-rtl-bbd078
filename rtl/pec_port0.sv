// pec_port0: output port 0 (pins P0.0 .. P0.7).
//
// Port0R latches the low byte of the data bus on the rising edge of the
// port's gated clock when p0wr is high (PORT0 instruction) and drives the
// pins until the next write. Reset clears it. The port, its register and
// the eight pins are the original's; the reset value is this design's.
module pec_port0 #(
  parameter int unsigned W = 8
) (
  input  logic         gclk,   // clock gated by Clkgatport0
  input  logic         rst,
  input  logic         p0wr,
  input  logic [W-1:0] din,
  output logic [W-1:0] pins
);
  always_ff @(posedge gclk or posedge rst) begin
    if (rst)       pins <= '0;
    else if (p0wr) pins <= din;
  end
endmodule

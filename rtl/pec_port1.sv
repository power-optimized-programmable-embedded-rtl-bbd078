// pec_port1: input port 1 (pins P1.0 .. P1.7).
//
// When p1wr is high, Port1R samples the pins on the rising edge of the
// port's gated clock; p1rd then puts it, zero-extended, on the data bus.
// The port is clocked only while a PORT1 instruction reads it, so the value
// is the one on the pins at that instruction. Pins that change
// asynchronously must be held stable around the read (the register is a
// single stage). Port, register and pin count are the original's; sampling
// only on a read is this design's choice.
module pec_port1 #(
  parameter int unsigned W = 8
) (
  input  logic         gclk,   // clock gated by Clkgatport1
  input  logic         rst,
  input  logic         p1wr,
  input  logic [W-1:0] pins,
  output logic [W-1:0] q
);
  always_ff @(posedge gclk or posedge rst) begin
    if (rst)       q <= '0;
    else if (p1wr) q <= pins;
  end
endmodule

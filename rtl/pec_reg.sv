// pec_reg: holding register of the controller's datapath (OpReg, outReg,
// InstReg, Address Reg, Ram Address Reg, Port registers, 7segReg).
//
// Loads d on the rising edge of its (gated) clock when ld is high; an
// asynchronous active-high reset clears it. The registers themselves are
// the original's; the load enable and the reset are this design's.
module pec_reg #(
  parameter int unsigned W = 16
) (
  input  logic         gclk,
  input  logic         rst,
  input  logic         ld,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  always_ff @(posedge gclk or posedge rst) begin
    if (rst)     q <= '0;
    else if (ld) q <= d;
  end
endmodule

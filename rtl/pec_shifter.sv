// pec_shifter: shifter between the ALU and outReg.
//
// Combinational. shfsel selects pass, shift left, shift right (logical, zero
// fill), rotate right or rotate left, each by one bit position. The place of
// the shifter after the ALU and the four shift instructions are the
// original's; the shift distance of one and the zero fill are this design's
// choices.
module pec_shifter
  import pec_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  shf_op_e      shfsel,
  input  logic [W-1:0] a,
  output logic [W-1:0] y
);
  always_comb begin
    unique case (shfsel)
      SHF_PASS: y = a;
      SHF_SHL:  y = {a[W-2:0], 1'b0};
      SHF_SHR:  y = {1'b0, a[W-1:1]};
      SHF_ROR:  y = {a[0], a[W-1:1]};
      SHF_ROL:  y = {a[W-2:0], a[W-1]};
      default:  y = a;
    endcase
  end
endmodule

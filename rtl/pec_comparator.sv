// pec_comparator: comparator for the conditional branches.
//
// Combinational. Compares operand a (OpReg) with operand b (the data bus)
// as unsigned numbers and raises compout when the condition chosen by
// compsel holds: equal, not equal, greater, less, less-or-equal, or b
// greater than zero (used by BGTI, which has room for only one register next
// to its 8-bit target address). The comparator and its one-bit result to the
// control unit are the original's; conditions come from the branch
// instructions; unsigned compares and the encoding are this design's.
module pec_comparator
  import pec_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  cmp_op_e      compsel,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         compout
);
  always_comb begin
    unique case (compsel)
      CMP_EQ:  compout = (a == b);
      CMP_NEQ: compout = (a != b);
      CMP_GT:  compout = (a >  b);
      CMP_LT:  compout = (a <  b);
      CMP_LTE: compout = (a <= b);
      CMP_GTZ: compout = (b != '0);
      default: compout = 1'b0;
    endcase
  end
endmodule

// pec_alu: 16-bit arithmetic and logic unit.
//
// Combinational. Operand a comes from OpReg, operand b from the data bus;
// ALUsel picks the operation (pec_pkg::alu_op_e). The 16-bit width and the
// set of operations (INC, DEC, AND, OR, XOR, NOT, ADD, SUB, ZERO) follow the
// instruction set; the select codes are this design's, except that INC is 7
// as in the original control-unit simulation. Carries are dropped: the
// instruction set has no flags.
module pec_alu
  import pec_pkg::*;
#(
  parameter int unsigned W = 16
) (
  input  alu_op_e      alusel,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W-1:0] y
);
  always_comb begin
    unique case (alusel)
      ALU_PASS: y = a;
      ALU_AND:  y = a & b;
      ALU_OR:   y = a | b;
      ALU_NOT:  y = ~a;
      ALU_XOR:  y = a ^ b;
      ALU_ADD:  y = a + b;
      ALU_SUB:  y = a - b;
      ALU_INC:  y = a + W'(1);
      ALU_DEC:  y = a - W'(1);
      ALU_ZERO: y = '0;
      default:  y = a;
    endcase
  end
endmodule

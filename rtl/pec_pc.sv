// pec_pc: program counter.
//
// On a rising edge of its gated clock with pcwr high it either increments
// (pcsel = PC_INC, during fetch) or loads the target from the data bus
// (pcsel = PC_LOAD, taken branch). clr, driven by the reset sequence, sets it
// to zero, the first ROM address. An asynchronous reset does the same.
// The PC and its pcsel/pcwr/pcrd controls are the original's; the reset
// address zero and the wrap-around at the end of the ROM are this design's.
module pec_pc
  import pec_pkg::*;
#(
  parameter int unsigned AW = 7
) (
  input  logic          gclk,
  input  logic          rst,
  input  logic          clr,
  input  logic          pcwr,
  input  pc_sel_e       pcsel,
  input  logic [AW-1:0] din,
  output logic [AW-1:0] pc
);
  always_ff @(posedge gclk or posedge rst) begin
    if (rst)       pc <= '0;
    else if (clr)  pc <= '0;
    else if (pcwr) pc <= (pcsel == PC_LOAD) ? din : pc + AW'(1);
  end
endmodule

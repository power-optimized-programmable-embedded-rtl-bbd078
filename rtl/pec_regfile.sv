// pec_regfile: register file of the controller, Reg0..Reg7, 16 bits each,
// modelled as a small RAM.
//
// One select (Regsel) addresses both the read and the write, as in the
// control-unit signal list. Read is combinational onto the data bus; a write
// takes place on the rising edge of the register file's gated clock when
// regwr is high. Eight registers and 16-bit words are the original's; the
// single shared select and the asynchronous read are this design's choices.
module pec_regfile #(
  parameter int unsigned NREGS = 8,
  parameter int unsigned W     = 16
) (
  input  logic                     gclk,   // clock gated by Clkgatregfile
  input  logic [$clog2(NREGS)-1:0] regsel,
  input  logic                     regwr,
  input  logic [W-1:0]             din,
  output logic [W-1:0]             dout
);
  logic [W-1:0] regs [NREGS];

  always_ff @(posedge gclk) begin
    if (regwr) regs[regsel] <= din;
  end

  assign dout = regs[regsel];
endmodule

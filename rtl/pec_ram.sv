// pec_ram: data RAM, 1K words of 16 bits, for LOAD and STORE.
//
// Write on the rising edge of the RAM's gated clock when ramwr is high;
// asynchronous read of the word at the Ram Address Reg. The 1K x 16 size
// follows the text of the original (its block diagram prints 128 x 16 and
// its summary table 1 KB); the read and write timing are this design's.
module pec_ram #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned W     = 16
) (
  input  logic                     gclk,   // clock gated by Clkgatram
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic                     ramwr,
  input  logic [W-1:0]             din,
  output logic [W-1:0]             dout
);
  logic [W-1:0] mem [WORDS];

  always_ff @(posedge gclk) begin
    if (ramwr) mem[addr] <= din;
  end

  assign dout = mem[addr];
endmodule

// pec_rom: program ROM, 256 bytes organised as 128 words of 16 bits.
//
// Asynchronous read of the word at the Address Reg. The contents come from
// the parameter INIT, a 128-word image (pec_pkg::rom_image_t, word i at
// index i; words beyond it read as zero); by default the demonstration
// program pec_pkg::demo_rom(). A testbench may also overwrite mem at run
// time. Size and word length are the original's; the program and the way
// it is loaded are this design's.
module pec_rom
  import pec_pkg::*;
#(
  parameter int unsigned WORDS = 128,
  parameter int unsigned W     = 16,
  parameter rom_image_t  INIT  = demo_rom()
) (
  input  logic [$clog2(WORDS)-1:0] addr,
  output logic [W-1:0]             dout
);
  logic [W-1:0] mem [WORDS];

  initial begin
    for (int i = 0; i < int'(WORDS); i++)
      mem[i] = (i < int'(ROM_IMAGE_WORDS)) ? W'(INIT[i]) : '0;
  end

  assign dout = mem[addr];
endmodule

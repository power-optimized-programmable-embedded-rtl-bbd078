// pec_bcd7seg: BCD to seven-segment display driver with its 7segReg.
//
// The B7S instruction loads the low four bits of the data bus into 7segReg
// on the rising edge of the driver's gated clock; a combinational decoder
// turns the BCD digit into the segments a..g (seg[0] = a ... seg[6] = g),
// active high. Codes 10..15 blank the display. The register, the decoder
// and the segment names are the original's; segment polarity and the blank
// for non-BCD codes are this design's.
module pec_bcd7seg (
  input  logic       gclk,   // clock gated by Clkgat7seg
  input  logic       rst,
  input  logic       ld,
  input  logic [3:0] bcd_in,
  output logic [3:0] digit,  // 7segReg
  output logic [6:0] seg     // {g,f,e,d,c,b,a}
);
  always_ff @(posedge gclk or posedge rst) begin
    if (rst)     digit <= '0;
    else if (ld) digit <= bcd_in;
  end

  always_comb begin
    unique case (digit)
      4'd0: seg = 7'b0111111;
      4'd1: seg = 7'b0000110;
      4'd2: seg = 7'b1011011;
      4'd3: seg = 7'b1001111;
      4'd4: seg = 7'b1100110;
      4'd5: seg = 7'b1101101;
      4'd6: seg = 7'b1111101;
      4'd7: seg = 7'b0000111;
      4'd8: seg = 7'b1111111;
      4'd9: seg = 7'b1101111;
      default: seg = 7'b0000000;
    endcase
  end
endmodule

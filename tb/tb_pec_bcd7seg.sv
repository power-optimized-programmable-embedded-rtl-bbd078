// tb_pec_bcd7seg: loads every code into 7segReg through the gated clock
// and checks the segment pattern; also checks that the register holds when
// ld is low and that reset clears it.
module tb_pec_bcd7seg;
  import pec_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin : watchdog
    #(100us);
    failures++;
    $display("watchdog expired");
    finish();
  end

  logic clk = 0, rst = 0, ld = 0;
  logic [3:0] bcd_in, digit;
  logic [6:0] seg;
  // {g,f,e,d,c,b,a} of a common seven-segment digit
  logic [6:0] pat [16] = '{7'h3f, 7'h06, 7'h5b, 7'h4f, 7'h66, 7'h6d, 7'h7d, 7'h07,
                          7'h7f, 7'h6f, 0, 0, 0, 0, 0, 0};
  pec_bcd7seg dut (.gclk(clk), .rst, .ld, .bcd_in, .digit, .seg);
  always #5 clk = ~clk;
  initial begin
    #1 rst = 1; #1 rst = 0;
    check(digit == 0 && seg == pat[0], "reset shows 0");
    for (int r = 0; r < 3; r++)
      for (int d = 0; d < 16; d++) begin
        @(negedge clk) begin bcd_in = 4'(d); ld = 1; end
        @(negedge clk) begin ld = 0; bcd_in = 4'(d + 3); end
        check(seg == pat[d], $sformatf("digit %0d seg %h", d, seg));
        @(negedge clk) check(digit == 4'(d), "hold when ld low");
      end
    finish();
  end
endmodule

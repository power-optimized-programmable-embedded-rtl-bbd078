// tb_pec_clock_gate: the gated clock must pulse exactly in the cycles whose
// enable was high before the rising edge, and a change of the enable while
// the clock is high must not cut or create a pulse.
module tb_pec_clock_gate;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin : watchdog
    #(1ms); failures++; $display("watchdog expired"); finish();
  end

  logic clk = 0, en = 0, gclk;
  int pulses = 0, expected = 0;
  pec_clock_gate dut (.clk, .en, .gclk);
  always #5 clk = ~clk;
  always @(posedge gclk) pulses++;

  initial begin
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      #1 en = 1'($urandom);
      if (en) expected++;
      @(posedge clk);
      #1 check(gclk == en, "gclk high only when enabled");
      // glitch attempt during the high phase
      en = ~en;
      #2 check(gclk == ~en, "enable change while clk high has no effect");
    end
    @(negedge clk) en = 0;
    #1 check(pulses == expected, $sformatf("pulses %0d exp %0d", pulses, expected));
    finish();
  end
endmodule

// tb_pec_port1: Port1R takes the pins only on a read strobe and keeps that
// value while the pins change.
module tb_pec_port1;
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

  logic clk = 0, rst = 0, p1wr = 0;
  logic [7:0] pins, q, e;
  pec_port1 dut (.gclk(clk), .rst, .p1wr, .pins, .q);
  always #5 clk = ~clk;

  initial begin
    #1 rst = 1; #1 rst = 0;
    check(q == 0, "reset");
    e = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk) begin pins = 8'($urandom); p1wr = ($urandom % 4) == 0; end
      if (p1wr) e = pins;
      @(posedge clk) #1 check(q == e, "sampled value");
    end
    finish();
  end
endmodule

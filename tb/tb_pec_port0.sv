// tb_pec_port0: the pins take the written byte on a write and keep it
// otherwise; reset clears them.
module tb_pec_port0;
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

  logic clk = 0, rst = 0, p0wr = 0;
  logic [7:0] din, pins, e;
  pec_port0 dut (.gclk(clk), .rst, .p0wr, .din, .pins);
  always #5 clk = ~clk;

  initial begin
    #1 rst = 1; #1 rst = 0;
    check(pins == 0, "reset");
    e = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk) begin din = 8'($urandom); p0wr = 1'($urandom); end
      if (p0wr) e = din;
      @(posedge clk) #1 check(pins == e, "pins");
    end
    finish();
  end
endmodule

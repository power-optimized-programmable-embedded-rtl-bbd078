// tb_pec_reg: load, hold and asynchronous reset of a holding register.
module tb_pec_reg;
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

  logic clk = 0, rst = 0, ld = 0;
  logic [15:0] d, q, e;
  pec_reg #(.W(16)) dut (.gclk(clk), .rst, .ld, .d, .q);
  always #5 clk = ~clk;

  initial begin
    #1 rst = 1;
    #1 check(q == 0, "async reset");
    rst = 0;
    e = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk) begin d = 16'($urandom); ld = 1'($urandom); end
      if (ld) e = d;
      @(posedge clk) #1 check(q == e, "load/hold");
      if (n == 500) begin
        #1 rst = 1;
        #1 check(q == 0, "async reset mid-run");
        rst = 0;
        e = 0;
      end
    end
    finish();
  end
endmodule

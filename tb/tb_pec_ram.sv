// tb_pec_ram: random writes and reads over all 1024 words against a shadow
// array; nothing is written while ramwr is low.
module tb_pec_ram;
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
    #(10ms); failures++; $display("watchdog expired"); finish();
  end

  logic clk = 0, ramwr = 0;
  logic [9:0] addr;
  logic [15:0] din, dout;
  logic [15:0] shadow [1024];
  pec_ram dut (.gclk(clk), .addr, .ramwr, .din, .dout);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk) begin addr = 10'(i); din = 16'($urandom); ramwr = 1; end
      shadow[i] = din;
    end
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      addr = 10'($urandom);
      din = 16'($urandom);
      ramwr = 1'($urandom);
      #1 check(dout == shadow[addr], $sformatf("read %0d", addr));
      if (ramwr) shadow[addr] = din;
    end
    finish();
  end
endmodule

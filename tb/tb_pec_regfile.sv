// tb_pec_regfile: random writes and reads of the eight registers against a
// shadow array; a write with regwr low must not change anything.
module tb_pec_regfile;
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

  logic clk = 0, regwr = 0;
  logic [2:0] regsel;
  logic [15:0] din, dout;
  logic [15:0] shadow [8];
  pec_regfile dut (.gclk(clk), .regsel, .regwr, .din, .dout);
  always #5 clk = ~clk;

  initial begin
    for (int i = 0; i < 8; i++) begin
      @(negedge clk) begin regsel = 3'(i); din = 16'($urandom); regwr = 1; end
      shadow[i] = din;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      regsel = 3'($urandom);
      din = 16'($urandom);
      regwr = 1'($urandom);
      #1 check(dout == shadow[regsel], $sformatf("read R%0d", regsel));
      if (regwr) shadow[regsel] = din;
    end
    finish();
  end
endmodule

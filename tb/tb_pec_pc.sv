// tb_pec_pc: increment, branch load, clear by the reset sequence and hold,
// against a counter kept here; the 7-bit PC wraps at 128.
module tb_pec_pc;
  import pec_pkg::*;
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

  logic clk = 0, rst = 0, clr = 0, pcwr = 0;
  pc_sel_e pcsel;
  logic [6:0] din, pc;
  int e = 0;
  pec_pc #(.AW(7)) dut (.gclk(clk), .rst, .clr, .pcwr, .pcsel, .din, .pc);
  always #5 clk = ~clk;

  initial begin
    #1 rst = 1; #1 rst = 0;
    check(pc == 0, "reset");
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk) begin
        clr = ($urandom % 50) == 0;
        pcwr = 1'($urandom);
        pcsel = pc_sel_e'(($urandom % 4) == 0);
        din = 7'($urandom);
      end
      if (clr) e = 0;
      else if (pcwr) e = (pcsel == PC_LOAD) ? din : (e + 1) % 128;
      @(posedge clk) #1 check(pc == 7'(e), $sformatf("pc %0d exp %0d", pc, e));
    end
    finish();
  end
endmodule

// tb_pec_shifter: checks pass, shift left/right and rotate right/left by
// one bit on random words, against bit-level expectations.
module tb_pec_shifter;
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
    #(1ms);
    failures++;
    $display("watchdog expired");
    finish();
  end

  shf_op_e op;
  logic [15:0] a, y, e;
  pec_shifter dut (.shfsel(op), .a, .y);
  initial begin
    for (int n = 0; n < 1000; n++) begin
      a = 16'($urandom);
      op = shf_op_e'(n % 5);
      #1;
      for (int i = 0; i < 16; i++)
        case (n % 5)
          0: e[i] = a[i];
          1: e[i] = (i == 0)  ? 1'b0 : a[i-1];
          2: e[i] = (i == 15) ? 1'b0 : a[i+1];
          3: e[i] = a[(i + 1) % 16];
          default: e[i] = a[(i + 15) % 16];
        endcase
      check(y == e, $sformatf("op %0d a %h y %h exp %h", n % 5, a, y, e));
    end
    finish();
  end
endmodule

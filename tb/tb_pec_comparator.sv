// tb_pec_comparator: random and equal operand pairs through every compare
// condition, against SystemVerilog relational operators.
module tb_pec_comparator;
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

  cmp_op_e op;
  logic [15:0] a, b;
  logic c, e;
  pec_comparator dut (.compsel(op), .a, .b, .compout(c));
  initial begin
    for (int n = 0; n < 3000; n++) begin
      a = 16'($urandom); b = (n % 7 == 0) ? a : 16'($urandom);
      if (n % 11 == 0) b = 16'd0;
      op = cmp_op_e'(n % 6);
      #1;
      case (n % 6)
        0: e = a == b; 1: e = a != b; 2: e = a > b;
        3: e = a < b;  4: e = a <= b; default: e = b > 0;
      endcase
      check(c == e, $sformatf("op %0d a %h b %h", n % 6, a, b));
    end
    finish();
  end
endmodule

// tb_pec_alu: drives random operands through every ALU operation and
// compares the result with an expression written here.
module tb_pec_alu;
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

  alu_op_e op;
  logic [15:0] a, b, y, e;
  pec_alu dut (.alusel(op), .a, .b, .y);
  initial begin
    for (int n = 0; n < 2000; n++) begin
      a = 16'($urandom); b = 16'($urandom);
      if (n < 10) a = 16'hffff;
      op = alu_op_e'(n % 10);
      #1;
      case (n % 10)
        0: e = a;       1: e = a & b;  2: e = a | b;   3: e = ~a;
        4: e = a ^ b;   5: e = a + b;  6: e = a - b;   7: e = a + 16'd1;
        8: e = a - 16'd1; default: e = 16'd0;
      endcase
      check(y == e, $sformatf("op %0d a %h b %h y %h exp %h", n % 10, a, b, y, e));
    end
    check(ALU_INC == 4'd7, "INC code 7");
    finish();
  end
endmodule

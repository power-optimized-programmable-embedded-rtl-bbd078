// tb_pec_rom: the ROM must hold the demonstration program it is built with
// (the words are listed here as assembled instructions) and return zero for
// the rest of its 128 words.
module tb_pec_rom;
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

  logic [6:0] addr;
  logic [15:0] dout;
  pec_rom dut (.addr, .dout);

  word_t prog [13];
  initial begin
    prog = '{
      mk_i(OP_LOADI, 0, 0), mk_i(OP_LOADI, 1, 10), mk_i(OP_LOADI, 2, 4),
      mk_i(OP_NOP, 0, 0), mk_r(OP_PORT0, 0, 0, 0), mk_r(OP_B7S, 0, 0, 0),
      mk_i(OP_STORE, 0, 8'h20), mk_i(OP_LOAD, 5, 8'h20), mk_r(OP_MOVE, 4, 5, 0),
      mk_r(OP_UARTS, 4, 0, 0), mk_r(OP_INC, 0, 0, 0), mk_r(OP_BLT, 0, 1, 2),
      mk_i(OP_BI, 0, 12)};
    for (int i = 0; i < 128; i++) begin
      addr = 7'(i);
      #1 check(dout == ((i < 13) ? prog[i] : 16'h0), $sformatf("rom[%0d] = %h", i, dout));
    end
    finish();
  end
endmodule

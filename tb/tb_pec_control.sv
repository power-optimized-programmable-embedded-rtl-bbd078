// tb_pec_control: runs the control unit alone, instruction by instruction,
// with the comparator result and UART status driven from here. For every
// opcode (branches with the condition true and false) it counts the cycles
// from FETCH1 to the next FETCH1 and how often each datapath strobe fired,
// and compares them with a table of expected values written here from the
// instruction semantics. It checks the ALU/shifter select in the cycle that
// loads outReg, the register selects of reads and writes, the reset
// sequence (reset1, reset2 with the PC clear, then fetch), the UARTS stall
// while the transmitter is busy, and that each clock-gating signal is high
// exactly in the cycles in which its block captures something. The word
// 16'h3800 of the original's control-unit trace is run on its own as INC.
module tb_pec_control;
  import pec_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin : watchdog
    #(10ms); failures++; $display("watchdog expired"); finish();
  end

  logic clk = 0, reset = 0, compin = 0, tx_busy = 0, rx_busy = 0, rx_line = 1;
  word_t instr;
  ctrl_t ctrl;
  logic pc_clr;
  clkgat_t clkgat;
  state_e state;

  pec_control dut (.clk, .reset, .instdatain(instr), .compin,
    .uart_tx_busy(tx_busy), .uart_rx_busy(rx_busy), .uart_rx_line(rx_line),
    .ctrl, .pc_clr, .clkgat, .state);
  always #5 clk = ~clk;

  // expected per instruction: cycles, regwr, opregwr, outregwr, ramwr,
  // ramaddrwr, p0wr, p1wr, s7, uartsel, pc loads
  typedef struct { int cyc, rw, ow, xw, mw, aw, p0, p1, s7, us, pl; } exp_t;

  function automatic exp_t expect_of(input opcode_e op, input logic c);
    exp_t e = '{3, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    case (op)
      OP_LOAD:  begin e.cyc = 4; e.aw = 1; e.rw = 1; end
      OP_STORE: begin e.cyc = 4; e.aw = 1; e.mw = 1; end
      OP_MOVE:  begin e.cyc = 4; e.ow = 1; e.rw = 1; end
      OP_LOADI: e.rw = 1;
      OP_BI, OP_BCH: e.pl = 1;
      OP_BGTI:  if (c) begin e.cyc = 4; e.pl = 1; end
      OP_PORT0: e.p0 = 1;
      OP_PORT1: begin e.cyc = 4; e.p1 = 1; e.rw = 1; end
      OP_B7S:   e.s7 = 1;
      OP_UARTS: begin e.cyc = 4; e.us = 1; e.rw = 1; end
      OP_INC, OP_DEC, OP_AND, OP_OR, OP_XOR, OP_NOT, OP_ADD, OP_SUB, OP_ZERO,
      OP_SHL, OP_SHR, OP_ROR, OP_ROL: begin e.cyc = 5; e.ow = 1; e.xw = 1; e.rw = 1; end
      OP_BLT, OP_BNEQ, OP_BGT, OP_BEQ, OP_BLTE:
        if (c) begin e.cyc = 5; e.ow = 1; e.pl = 1; end
        else   begin e.cyc = 4; e.ow = 1; end
      default: ;
    endcase
    return e;
  endfunction

  function automatic int alu_expected(input opcode_e op);
    case (op)
      OP_INC: return 7; OP_DEC: return 8; OP_AND: return 1; OP_OR: return 2;
      OP_XOR: return 4; OP_NOT: return 3; OP_ADD: return 5; OP_SUB: return 6;
      OP_ZERO: return 9; default: return 0;
    endcase
  endfunction
  function automatic int shf_expected(input opcode_e op);
    case (op)
      OP_SHL: return 1; OP_SHR: return 2; OP_ROR: return 3; OP_ROL: return 4;
      default: return 0;
    endcase
  endfunction

  task automatic do_reset();
    @(negedge clk) reset = 1;
    @(negedge clk) reset = 0;
    check(state == S_RESET1 && !pc_clr, "reset1");
    @(negedge clk) check(state == S_RESET2 && pc_clr && clkgat.rom, "reset2 clears PC");
    @(negedge clk) check(state == S_FETCH1 && ctrl.bus_src == BUS_PC && ctrl.addressregwr, "fetch1");
  endtask

  // Run one instruction from FETCH1; the instruction appears on instdatain
  // after FETCH2, as InstReg would load it.
  task automatic run_one(input word_t ins, input logic c, output exp_t got, output int stall);
    got = '{0, 0, 0, 0, 0, 0, 0, 0, 0, 0, 0};
    stall = 0;
    check(state == S_FETCH1, "starts at fetch1");
    do begin
      // sampled just after the falling edge: controls are stable
      #1;
      if (state == S_FETCH2) check(ctrl.bus_src == BUS_ROM && ctrl.instrwr && ctrl.pcwr &&
                                   ctrl.pcsel == PC_INC, "fetch2");
      if (state == S_DECODE && tx_busy && ins[15:11] == OP_UARTS) stall++;
      got.rw += ctrl.regwr; got.ow += ctrl.opregwr; got.xw += ctrl.outregwr;
      got.mw += ctrl.ramwr; got.aw += ctrl.ramaddrwr; got.p0 += ctrl.p0wr;
      got.p1 += ctrl.p1wr;  got.s7 += ctrl.s7segsel;  got.us += ctrl.uartsel;
      got.pl += (ctrl.pcwr && ctrl.pcsel == PC_LOAD);
      if (ctrl.outregwr) begin
        check(int'(ctrl.alusel) == alu_expected(opcode_e'(ins[15:11])), "alusel");
        check(int'(ctrl.shfsel) == shf_expected(opcode_e'(ins[15:11])), "shfsel");
      end
      if (ctrl.regwr) check(ctrl.regsel == ins[10:8], "write goes to ra");
      // clock gating: a domain is clocked exactly when it captures
      check(clkgat.regfile == ctrl.regwr, "gate regfile");
      check(clkgat.alu == (ctrl.opregwr | ctrl.outregwr), "gate alu");
      check(clkgat.ram == (ctrl.ramwr | ctrl.ramaddrwr), "gate ram");
      check(clkgat.port0 == ctrl.p0wr && clkgat.port1 == ctrl.p1wr &&
            clkgat.seg7 == ctrl.s7segsel, "gate ports and 7seg");
      check(clkgat.rom == (ctrl.addressregwr | ctrl.instrwr | ctrl.pcwr), "gate rom");
      check(clkgat.uart == (ctrl.uartsel | tx_busy | rx_busy | !rx_line), "gate uart");
      @(negedge clk);
      got.cyc++;
      if (state == S_DECODE && got.cyc == 2) instr = ins;
      compin = c;
      if (stall == 3) tx_busy = 0;
    end while (state != S_FETCH1 && got.cyc < 100);
  endtask

  initial begin
    exp_t e, g;
    word_t ins;
    int stall, n_stall = 0;
    instr = '0;
    do_reset();
    for (int rep = 0; rep < 2; rep++)
      for (int o = 0; o < 32; o++)
        for (int c = 0; c < 2; c++) begin
          ins = {5'(o), 11'($urandom)};
          instr = 16'hffff;   // stale InstReg until FETCH2
          tx_busy = (o == OP_UARTS) && (c == 1);
          run_one(ins, 1'(c), g, stall);
          if (stall > 0) begin
            n_stall++;
            check(stall == 3, $sformatf("UARTS stalled %0d cycles", stall));
            g.cyc -= stall;
          end
          e = expect_of(opcode_e'(o), 1'(c));
          check(g == e, $sformatf("op %05b c %0d: cyc %0d/%0d rw %0d/%0d ow %0d/%0d xw %0d/%0d mw %0d/%0d aw %0d/%0d pl %0d/%0d",
                o, c, g.cyc, e.cyc, g.rw, e.rw, g.ow, e.ow, g.xw, e.xw, g.mw, e.mw, g.aw, e.aw, g.pl, e.pl));
        end
    check(n_stall == 2, "UARTS stall seen");
    // the word 16'h3800 of the published control-unit waveform: INC r0,
    // five cycles, ALU select 7 in the cycle that loads outReg
    tx_busy = 0;
    run_one(16'h3800, 1'b0, g, stall);
    check(g == expect_of(OP_INC, 1'b0), "instruction 16'h3800 runs as INC");
    // reset in the middle of an instruction returns to reset1
    instr = mk_r(OP_ADD, 1, 2, 0);
    repeat (3) @(negedge clk);
    do_reset();
    // a start bit on rx turns the UART clock on while everything else idles
    rx_line = 0;
    #1 check(clkgat.uart, "uart clock on for a start bit");
    rx_line = 1;
    #1 check(!clkgat.uart, "uart clock off when idle");
    finish();
  end
endmodule

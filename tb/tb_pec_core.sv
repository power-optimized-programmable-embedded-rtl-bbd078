// tb_pec_core: end-to-end check of the controller core against an
// instruction-level reference model.
//
// A reference model written here from the instruction set (registers, PC,
// RAM, port 0, 7-segment digit, UART bytes) executes the same program as the
// core in lockstep: every time the core enters FETCH1 the model retires one
// instruction and the two architectural states are compared, together with
// the number of clock cycles the instruction took. A serial decoder on tx
// checks the bytes sent by UARTS, and a byte is sent to rx so that UARTS
// reads it back. Part 1 runs a directed program that uses every opcode;
// part 2 runs a random program. The testbench also counts how often each
// mechanism of the design happened: every opcode, taken and untaken
// branches, the UART stall, and gated and running cycles of each of the
// eight clock domains.
module tb_pec_core;
  import pec_pkg::*;

  localparam int unsigned CPB = 8;   // UART clocks per bit, short for simulation

  logic clk = 1'b0, reset = 1'b0, rx = 1'b1;
  logic [7:0] port1_pins;
  logic [7:0] port0_pins;
  logic [6:0] seg;
  logic tx;
  clkgat_t clkgat;
  int checks = 0, failures = 0;

  pec_core #(.UART_CLKS_PER_BIT(CPB)) dut (
    .clk, .reset, .port1_pins, .port0_pins, .seg, .tx, .rx, .clkgat
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- reference model ----------------
  logic [15:0] m_reg [8];
  logic [15:0] m_ram [1024];
  logic [6:0]  m_pc;
  logic [7:0]  m_p0;
  logic [3:0]  m_digit;
  logic [7:0]  m_rx;
  logic [7:0]  m_txq [$];
  int          m_cycles;        // cycles of the last instruction (no stall)
  logic        m_uarts;         // last instruction was UARTS
  int          op_count [32];
  int          taken = 0, untaken = 0;

  function automatic logic [6:0] seg_of(input logic [3:0] d);
    case (d)  // {g,f,e,d,c,b,a}
      0: return 7'h3f; 1: return 7'h06; 2: return 7'h5b; 3: return 7'h4f;
      4: return 7'h66; 5: return 7'h6d; 6: return 7'h7d; 7: return 7'h07;
      8: return 7'h7f; 9: return 7'h6f; default: return 7'h00;
    endcase
  endfunction

  task automatic model_step();
    logic [15:0] ins = dut.u_rom.mem[m_pc];
    logic [4:0]  op  = ins[15:11];
    logic [2:0]  ra = ins[10:8], rb = ins[7:5], rt = ins[4:2];
    logic [7:0]  imm = ins[7:0];
    logic [15:0] a = m_reg[ra], b = m_reg[rb];
    logic        c;
    op_count[op]++;
    m_pc     = m_pc + 7'd1;
    m_cycles = 3;
    m_uarts  = 1'b0;
    case (op)
      5'b00001: begin m_reg[ra] = m_ram[{2'b00, imm}]; m_cycles = 4; end
      5'b00010: begin m_ram[{2'b00, imm}] = a; m_cycles = 4; end
      5'b00011: begin m_reg[ra] = b; m_cycles = 4; end
      5'b00100: m_reg[ra] = {8'h00, imm};
      5'b00101: m_pc = imm[6:0];
      5'b00110: if (a > 0) begin m_pc = imm[6:0]; m_cycles = 4; taken++; end
                else untaken++;
      5'b00111: begin m_reg[ra] = a + 1;  m_cycles = 5; end
      5'b01000: begin m_reg[ra] = a - 1;  m_cycles = 5; end
      5'b01001: begin m_reg[ra] = a & b;  m_cycles = 5; end
      5'b01010: begin m_reg[ra] = a | b;  m_cycles = 5; end
      5'b01011: begin m_reg[ra] = a ^ b;  m_cycles = 5; end
      5'b01100: begin m_reg[ra] = ~a;     m_cycles = 5; end
      5'b01101: begin m_reg[ra] = a + b;  m_cycles = 5; end
      5'b01110: begin m_reg[ra] = a - b;  m_cycles = 5; end
      5'b01111: begin m_reg[ra] = 0;      m_cycles = 5; end
      5'b10000: m_p0 = a[7:0];
      5'b10011: begin m_reg[ra] = {8'h00, port1_pins}; m_cycles = 4; end
      5'b10110: m_pc = a[6:0];
      5'b11000: m_digit = a[3:0];
      5'b11010: begin m_reg[ra] = a << 1; m_cycles = 5; end
      5'b11011: begin m_reg[ra] = a >> 1; m_cycles = 5; end
      5'b11100: begin m_reg[ra] = {a[0], a[15:1]};  m_cycles = 5; end
      5'b11101: begin m_reg[ra] = {a[14:0], a[15]}; m_cycles = 5; end
      5'b11110: begin
        m_txq.push_back(a[7:0]);
        m_reg[ra] = {8'h00, m_rx};
        m_cycles = 4;
        m_uarts = 1'b1;
      end
      5'b10001, 5'b10010, 5'b10100, 5'b10111, 5'b11001: begin
        case (op)
          5'b10001: c = a <  b;
          5'b10010: c = a != b;
          5'b10100: c = a >  b;
          5'b10111: c = a == b;
          default:  c = a <= b;
        endcase
        if (c) begin m_pc = m_reg[rt][6:0]; m_cycles = 5; taken++; end
        else   begin m_cycles = 4; untaken++; end
      end
      default: ;  // NOP, 10101
    endcase
  endtask

  // ---------------- UART serial decoder on tx ----------------
  int tx_bytes = 0;
  logic draining = 1'b0;   // between programs: bytes of an unretired UARTS
  initial begin : tx_decoder
    logic [7:0] byte_v, exp_b;
    wait (reset);
    wait (!reset);
    forever begin
      @(negedge tx);
      if (reset) continue;
      repeat (CPB / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        byte_v[i] = tx;
      end
      repeat (CPB) @(posedge clk);
      if (draining) continue;
      check(tx == 1'b1, "tx stop bit");
      if (m_txq.size() == 0) check(1'b0, "unexpected tx byte");
      else begin
        exp_b = m_txq.pop_front();
        check(byte_v == exp_b, $sformatf("tx byte %02x exp %02x", byte_v, exp_b));
      end
      tx_bytes++;
    end
  end

  task automatic send_rx(input logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  // ---------------- mechanism counters ----------------
  int gated [8], running [8];
  int stall_cycles = 0;
  always @(posedge clk) if (!reset) begin
    logic [7:0] g;
    g = clkgat;
    for (int i = 0; i < 8; i++) if (g[i]) running[i]++; else gated[i]++;
    if (dut.state == S_DECODE && dut.instreg[15:11] == OP_UARTS &&
        dut.u_uart.tx_busy) stall_cycles++;
  end

  // ---------------- lockstep run ----------------
  task automatic run_program(input int n_instr, input string name);
    int cyc = 0, retired = 0;
    logic first = 1'b1;
    draining = 1'b1;
    @(posedge clk);
    #1 reset = 1'b1;
    repeat (12 * CPB) @(posedge clk);
    m_txq.delete();
    draining = 1'b0;
    m_rx = 8'h00;
    repeat (3) @(posedge clk);
    #1 reset = 1'b0;
    for (int i = 0; i < 8; i++) m_reg[i] = dut.u_regfile.regs[i];
    for (int i = 0; i < 1024; i++) m_ram[i] = dut.u_ram.mem[i];
    m_pc = 0; m_p0 = 0; m_digit = 0;
    // reset1, reset2 then the first FETCH1
    while (retired < n_instr) begin
      @(negedge clk);
      cyc++;
      if (dut.state == S_FETCH1) begin
        if (!first) begin
          model_step();
          retired++;
          if (m_uarts) check(cyc >= m_cycles, $sformatf("%s cycles UARTS", name));
          else check(cyc == m_cycles,
                     $sformatf("%s cycles %0d exp %0d (ins %0d)", name, cyc, m_cycles, retired));
          for (int r = 0; r < 8; r++)
            check(dut.u_regfile.regs[r] == m_reg[r],
                  $sformatf("%s R%0d=%h exp %h after instr %0d", name, r,
                            dut.u_regfile.regs[r], m_reg[r], retired));
          check(dut.u_pc.pc == m_pc, $sformatf("%s pc %0d exp %0d", name, dut.u_pc.pc, m_pc));
          check(port0_pins == m_p0, $sformatf("%s port0 %h exp %h", name, port0_pins, m_p0));
          check(seg == seg_of(m_digit), $sformatf("%s seg %h exp %h", name, seg, seg_of(m_digit)));
        end else begin
          check(cyc == 3, "reset sequence length");
        end
        first = 1'b0;
        cyc = 0;
      end
    end
    for (int i = 0; i < 256; i++)
      if (dut.u_ram.mem[i] != m_ram[i]) check(1'b0, $sformatf("%s ram[%0d]", name, i));
    checks++;
  endtask

  function automatic logic [15:0] rnd_instr();
    logic [4:0] op;
    do op = 5'($urandom_range(0, 31)); while (op == 5'b11111);
    return {op, 11'($urandom)};
  endfunction

  initial begin
    logic [15:0] prog [$];
    int halt;
    port1_pins = 8'h3c;
    for (int i = 0; i < 32; i++) op_count[i] = 0;
    for (int i = 0; i < 8; i++) begin gated[i] = 0; running[i] = 0; end

    // ---- part 1: directed program ----
    prog = '{
      mk_i(OP_LOADI, 0, 8'h5a), mk_i(OP_LOADI, 1, 8'h0f),
      mk_r(OP_MOVE, 2, 0, 0),   mk_r(OP_AND, 2, 1, 0),
      mk_r(OP_MOVE, 3, 0, 0),   mk_r(OP_OR, 3, 1, 0),
      mk_r(OP_MOVE, 4, 0, 0),   mk_r(OP_XOR, 4, 1, 0),
      mk_r(OP_MOVE, 5, 0, 0),   mk_r(OP_NOT, 5, 0, 0),
      mk_r(OP_ADD, 5, 0, 0),    mk_r(OP_SUB, 5, 1, 0),
      mk_r(OP_INC, 5, 0, 0),    mk_r(OP_DEC, 5, 0, 0),
      mk_r(OP_SHL, 5, 0, 0),    mk_r(OP_SHR, 5, 0, 0),
      mk_r(OP_ROR, 5, 0, 0),    mk_r(OP_ROL, 5, 0, 0),
      mk_r(OP_ZERO, 6, 0, 0),   mk_i(OP_STORE, 0, 8'h30),
      mk_i(OP_LOAD, 6, 8'h30),  mk_r(OP_PORT0, 3, 0, 0),
      mk_r(OP_PORT1, 7, 0, 0),  mk_r(OP_B7S, 1, 0, 0),
      mk_i(OP_LOADI, 7, 8'h07), mk_r(OP_B7S, 7, 0, 0),
      // 26: count r0 from 0 to 4
      mk_i(OP_LOADI, 0, 8'h00), mk_i(OP_LOADI, 1, 8'h04),
      mk_i(OP_LOADI, 2, 8'd30),
      mk_i(OP_NOP, 0, 0),
      mk_r(OP_INC, 0, 0, 0),    mk_r(OP_BLT, 0, 1, 2),     // 30, 31
      mk_i(OP_LOADI, 3, 8'd36),
      mk_r(OP_BNEQ, 0, 1, 3),   mk_r(OP_BEQ, 0, 1, 3),     // 33 not taken, 34 taken
      mk_i(OP_NOP, 0, 0),                                  // 35 skipped
      mk_i(OP_LOADI, 3, 8'd40), mk_r(OP_BGT, 0, 1, 3),     // 36, 37 not taken
      mk_r(OP_BLTE, 0, 1, 3),   mk_i(OP_NOP, 0, 0),        // 38 taken, 39 skipped
      mk_i(OP_BGTI, 6, 8'd42),  mk_i(OP_NOP, 0, 0),        // 40 taken (r6 = 5a)
      mk_r(OP_ZERO, 6, 0, 0),   mk_i(OP_BGTI, 6, 8'd0),    // 42, 43 not taken
      16'b10101_000_0000_0000,  mk_i(OP_LOADI, 3, 8'd48),  // 44 unassigned, 45
      mk_r(OP_BCH, 3, 0, 0),    mk_i(OP_NOP, 0, 0),        // 46, 47 skipped
      mk_i(OP_BI, 0, 8'd50),    mk_i(OP_NOP, 0, 0),        // 48, 49 skipped
      // 50: UART: two bytes back to back (the second stalls), then read rx
      mk_i(OP_LOADI, 4, 8'hc3), mk_r(OP_UARTS, 4, 0, 0),
      mk_i(OP_LOADI, 5, 8'h81), mk_r(OP_UARTS, 5, 0, 0),
      mk_i(OP_LOADI, 0, 8'h00), mk_i(OP_LOADI, 1, 8'd60),  // 54, 55
      mk_i(OP_LOADI, 2, 8'd57), mk_r(OP_INC, 0, 0, 0),     // 56, 57 delay loop
      mk_r(OP_BLT, 0, 1, 2),    mk_i(OP_LOADI, 6, 8'h00),  // 58, 59
      mk_r(OP_UARTS, 6, 0, 0),  mk_i(OP_BI, 0, 8'd61)      // 60, 61 halt
    };
    for (int i = 0; i < 128; i++) dut.u_rom.mem[i] = (i < prog.size()) ? prog[i] : 16'h0;
    halt = 0;
    fork
      run_program(200, "directed");
      begin
        wait (!reset);
        repeat (600) @(posedge clk);
        send_rx(8'h6e);
        m_rx = 8'h6e;   // received long before the UARTS at 60 reads it
      end
    join
    check(dut.u_regfile.regs[6] == 16'h006e, "UARTS read back the rx byte");
    repeat (20 * CPB) @(posedge clk);
    check(m_txq.size() == 0, "all UART bytes seen on tx");

    // ---- part 2: random program ----
    for (int p = 0; p < 10; p++) begin
      for (int i = 0; i < 128; i++) dut.u_rom.mem[i] = rnd_instr();
      run_program(400, $sformatf("random%0d", p));
    end

    // ---- mechanisms ----
    for (int i = 0; i < 30; i++)
      if (i != 5'b10101) check(op_count[i] > 0, $sformatf("opcode %05b executed", i));
    check(taken > 0 && untaken > 0, "branches taken and not taken");
    check(stall_cycles > 0, "UARTS stalled on a busy transmitter");
    for (int i = 0; i < 8; i++)
      check(gated[i] > 0 && running[i] > 0, $sformatf("clock domain %0d gated and running", i));
    $display("mechanisms: taken=%0d untaken=%0d uart_stall_cycles=%0d tx_bytes=%0d",
             taken, untaken, stall_cycles, tx_bytes);
    for (int i = 7; i >= 0; i--)
      $display("clock domain %0d (alu,port0,port1,ram,regfile,rom,uart,seg7 = 7..0): running %0d gated %0d",
               i, running[i], gated[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

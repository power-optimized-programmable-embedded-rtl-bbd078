// pec_control: control unit of the controller.
//
// A state machine written as two processes, as in the original: a
// combinational process that looks at the current state, the instruction in
// InstReg (instdatain) and the inputs (compin from the comparator, the
// UART's status) and produces every datapath control and the next state,
// and a clocked process that stores the state. Reset (active high,
// asynchronous) puts the machine in reset1, the first state of the reset
// sequence; reset2 then clears the PC so that execution starts at ROM
// address 0.
//
// Every instruction takes the two fetch states (FETCH1: Address Reg <= PC;
// FETCH2: InstReg <= ROM word, PC <= PC + 1), then DECODE and at most two
// execute states. Cycle counts, fetch included:
//   NOP, LOADI, BI, BCH, PORT0, B7S, BGTI not taken             3
//   LOAD, STORE, MOVE, PORT1, UARTS, BGTI taken, compare-branch
//     not taken                                                 4
//   ALU and shift instructions, compare-branch taken            5
// UARTS waits in DECODE while the transmitter is still busy.
//
// Clock gating: for each of the eight gated blocks the unit raises its
// clock-gating signal exactly in the cycles whose closing edge the block
// needs: the register file when it is written, the ALU registers (OpReg,
// outReg) when they load, the ROM side (PC, Address Reg, InstReg) in fetch,
// reset2 and taken branches, the RAM on address loads and writes, each port
// and the 7-segment register only on their instruction, and the UART while
// it sends or receives. All other cycles the blocks get no clock edge.
//
// The state names other than reset1, the states' work and the cycle counts
// are this design's; the signal names follow the original's control-unit
// signal list, grouped into the ctrl_t and clkgat_t structs of pec_pkg.
module pec_control
  import pec_pkg::*;
(
  input  logic    clk,
  input  logic    reset,
  input  word_t   instdatain,   // InstReg
  input  logic    compin,       // comparator result
  input  logic    uart_tx_busy,
  input  logic    uart_rx_busy,
  input  logic    uart_rx_line, // rx pin: low may be a start bit
  output ctrl_t   ctrl,
  output logic    pc_clr,       // reset sequence: PC <= 0
  output clkgat_t clkgat,
  output state_e  state
);
  state_e  next_state;
  opcode_e op;
  logic [2:0] ra, rb, rt;

  assign op = instr_op(instdatain);
  assign ra = instr_ra(instdatain);
  assign rb = instr_rb(instdatain);
  assign rt = instr_rt(instdatain);

  function automatic alu_op_e alu_of(input opcode_e o);
    unique case (o)
      OP_INC:  return ALU_INC;
      OP_DEC:  return ALU_DEC;
      OP_AND:  return ALU_AND;
      OP_OR:   return ALU_OR;
      OP_XOR:  return ALU_XOR;
      OP_NOT:  return ALU_NOT;
      OP_ADD:  return ALU_ADD;
      OP_SUB:  return ALU_SUB;
      OP_ZERO: return ALU_ZERO;
      default: return ALU_PASS;
    endcase
  endfunction

  function automatic shf_op_e shf_of(input opcode_e o);
    unique case (o)
      OP_SHL:  return SHF_SHL;
      OP_SHR:  return SHF_SHR;
      OP_ROR:  return SHF_ROR;
      OP_ROL:  return SHF_ROL;
      default: return SHF_PASS;
    endcase
  endfunction

  function automatic cmp_op_e cmp_of(input opcode_e o);
    unique case (o)
      OP_BLT:  return CMP_LT;
      OP_BNEQ: return CMP_NEQ;
      OP_BGT:  return CMP_GT;
      OP_BEQ:  return CMP_EQ;
      OP_BLTE: return CMP_LTE;
      default: return CMP_GTZ;
    endcase
  endfunction

  function automatic logic is_alu1(input opcode_e o);   // one operand
    return o inside {OP_INC, OP_DEC, OP_NOT, OP_ZERO,
                     OP_SHL, OP_SHR, OP_ROR, OP_ROL};
  endfunction
  function automatic logic is_alu2(input opcode_e o);   // two operands
    return o inside {OP_AND, OP_OR, OP_XOR, OP_ADD, OP_SUB};
  endfunction
  function automatic logic is_cbr(input opcode_e o);    // compare-branch
    return o inside {OP_BLT, OP_BNEQ, OP_BGT, OP_BEQ, OP_BLTE};
  endfunction

  // ---------------- combinational process ----------------
  always_comb begin
    ctrl         = '0;
    ctrl.bus_src = BUS_NONE;
    ctrl.alusel  = ALU_PASS;
    ctrl.shfsel  = SHF_PASS;
    ctrl.compsel = cmp_of(op);
    ctrl.pcsel   = PC_INC;
    ctrl.regsel  = ra;
    pc_clr       = 1'b0;
    next_state   = state;

    unique case (state)
      S_RESET1: next_state = S_RESET2;

      S_RESET2: begin
        pc_clr     = 1'b1;
        next_state = S_FETCH1;
      end

      S_FETCH1: begin
        ctrl.bus_src      = BUS_PC;
        ctrl.addressregwr = 1'b1;
        next_state        = S_FETCH2;
      end

      S_FETCH2: begin
        ctrl.bus_src = BUS_ROM;
        ctrl.instrwr = 1'b1;
        ctrl.pcwr    = 1'b1;
        ctrl.pcsel   = PC_INC;
        next_state   = S_DECODE;
      end

      S_DECODE: begin
        next_state = S_FETCH1;
        if (op == OP_LOAD || op == OP_STORE) begin
          ctrl.ramaddrwr = 1'b1;
          next_state     = S_EXEC1;
        end else if (op == OP_MOVE) begin
          ctrl.regsel  = rb;
          ctrl.bus_src = BUS_REG;
          ctrl.opregwr = 1'b1;
          next_state   = S_EXEC1;
        end else if (op == OP_LOADI) begin
          ctrl.bus_src = BUS_INSTR;
          ctrl.regwr   = 1'b1;
        end else if (op == OP_BI) begin
          ctrl.bus_src = BUS_INSTR;
          ctrl.pcwr    = 1'b1;
          ctrl.pcsel   = PC_LOAD;
        end else if (op == OP_BGTI) begin
          ctrl.bus_src = BUS_REG;
          if (compin) next_state = S_EXEC1;
        end else if (is_alu1(op) || is_alu2(op) || is_cbr(op)) begin
          ctrl.bus_src = BUS_REG;
          ctrl.opregwr = 1'b1;
          next_state   = S_EXEC1;
        end else if (op == OP_BCH) begin
          ctrl.bus_src = BUS_REG;
          ctrl.pcwr    = 1'b1;
          ctrl.pcsel   = PC_LOAD;
        end else if (op == OP_PORT0) begin
          ctrl.bus_src = BUS_REG;
          ctrl.p0wr    = 1'b1;
        end else if (op == OP_PORT1) begin
          ctrl.p1wr  = 1'b1;
          next_state = S_EXEC1;
        end else if (op == OP_B7S) begin
          ctrl.bus_src  = BUS_REG;
          ctrl.s7segsel = 1'b1;
        end else if (op == OP_UARTS) begin
          if (uart_tx_busy) begin
            next_state = S_DECODE;            // stall until the byte is out
          end else begin
            ctrl.bus_src = BUS_REG;
            ctrl.uartsel = 1'b1;
            next_state   = S_EXEC1;
          end
        end
        // NOP and the unassigned opcode: back to fetch
      end

      S_EXEC1: begin
        next_state = S_FETCH1;
        if (op == OP_LOAD) begin
          ctrl.bus_src = BUS_RAM;
          ctrl.regwr   = 1'b1;
        end else if (op == OP_STORE) begin
          ctrl.bus_src = BUS_REG;
          ctrl.ramwr   = 1'b1;
        end else if (op == OP_MOVE) begin
          ctrl.bus_src = BUS_OPREG;
          ctrl.regwr   = 1'b1;
        end else if (op == OP_BGTI) begin
          ctrl.bus_src = BUS_INSTR;
          ctrl.pcwr    = 1'b1;
          ctrl.pcsel   = PC_LOAD;
        end else if (is_alu1(op)) begin
          ctrl.alusel   = alu_of(op);
          ctrl.shfsel   = shf_of(op);
          ctrl.outregwr = 1'b1;
          next_state    = S_EXEC2;
        end else if (is_alu2(op)) begin
          ctrl.regsel   = rb;
          ctrl.bus_src  = BUS_REG;
          ctrl.alusel   = alu_of(op);
          ctrl.outregwr = 1'b1;
          next_state    = S_EXEC2;
        end else if (is_cbr(op)) begin
          ctrl.regsel  = rb;
          ctrl.bus_src = BUS_REG;
          if (compin) next_state = S_EXEC2;
        end else if (op == OP_PORT1) begin
          ctrl.bus_src = BUS_PORT1;
          ctrl.regwr   = 1'b1;
        end else if (op == OP_UARTS) begin
          ctrl.bus_src = BUS_UART;
          ctrl.regwr   = 1'b1;
        end
      end

      S_EXEC2: begin
        next_state = S_FETCH1;
        if (is_cbr(op)) begin
          ctrl.regsel  = rt;
          ctrl.bus_src = BUS_REG;
          ctrl.pcwr    = 1'b1;
          ctrl.pcsel   = PC_LOAD;
        end else begin
          ctrl.bus_src = BUS_OUTREG;
          ctrl.regwr   = 1'b1;
        end
      end

      default: next_state = S_RESET1;
    endcase

    // clock gating signals: a block is clocked only when it must capture
    clkgat.regfile = ctrl.regwr;
    clkgat.alu     = ctrl.opregwr | ctrl.outregwr;
    clkgat.rom     = ctrl.addressregwr | ctrl.instrwr | ctrl.pcwr | pc_clr;
    clkgat.ram     = ctrl.ramaddrwr | ctrl.ramwr;
    clkgat.port0   = ctrl.p0wr;
    clkgat.port1   = ctrl.p1wr;
    clkgat.seg7    = ctrl.s7segsel;
    clkgat.uart    = ctrl.uartsel | uart_tx_busy | uart_rx_busy | ~uart_rx_line;
  end

  // ---------------- sequential process ----------------
  always_ff @(posedge clk or posedge reset) begin
    if (reset) state <= S_RESET1;
    else       state <= next_state;
  end

  // Bus rule: a register write or a PC load always has a source on the bus.
  a_regwr_bus: assert property (@(posedge clk) disable iff (reset)
                                ctrl.regwr |-> ctrl.bus_src != BUS_NONE);
  a_pcload_bus: assert property (@(posedge clk) disable iff (reset)
                                 (ctrl.pcwr && ctrl.pcsel == PC_LOAD) |-> ctrl.bus_src != BUS_NONE);
endmodule

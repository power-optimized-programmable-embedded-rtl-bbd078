// pec_pkg: types and constants shared by the programmable embedded controller.
//
// The 5-bit opcodes are the ones of the controller's instruction set table;
// opcode 10101 is unassigned there and executes as NOP. Everything else in
// this package is an encoding chosen for this design: the instruction field
// layout, the ALU, shifter and comparator select codes (the widths 4, 5 and 5
// bits follow the control-unit signal list ALUsel(3:0), shfsel(4:0),
// compsel(4:0); ALU code 7 = increment is the value the control-unit
// simulation shows for an INC instruction), the bus source codes and the
// controller states (only the name of the first reset state, reset1, is the
// original's).
//
// Instruction layout (16 bits, one word, direct addressing):
//   [15:11] opcode
//   [10:8]  ra   : destination / first operand register
//   [7:5]   rb   : second operand register (two-register ALU ops, compares)
//   [4:2]   rt   : register holding the branch target (register branches)
//   [7:0]   imm8 : immediate value (LOADI), RAM address (LOAD/STORE) or
//                  ROM address (BI, BGTI)
package pec_pkg;

  localparam int unsigned DATA_W = 16;   // ALU / register / memory word width
  localparam int unsigned NREGS  = 8;    // Reg0 .. Reg7
  localparam int unsigned RSEL_W = 3;    // Regsel(2:0)

  typedef logic [DATA_W-1:0] word_t;

  typedef enum logic [4:0] {
    OP_NOP   = 5'b00000,
    OP_LOAD  = 5'b00001,
    OP_STORE = 5'b00010,
    OP_MOVE  = 5'b00011,
    OP_LOADI = 5'b00100,
    OP_BI    = 5'b00101,
    OP_BGTI  = 5'b00110,
    OP_INC   = 5'b00111,
    OP_DEC   = 5'b01000,
    OP_AND   = 5'b01001,
    OP_OR    = 5'b01010,
    OP_XOR   = 5'b01011,
    OP_NOT   = 5'b01100,
    OP_ADD   = 5'b01101,
    OP_SUB   = 5'b01110,
    OP_ZERO  = 5'b01111,
    OP_PORT0 = 5'b10000,
    OP_BLT   = 5'b10001,
    OP_BNEQ  = 5'b10010,
    OP_PORT1 = 5'b10011,
    OP_BGT   = 5'b10100,
    OP_BCH   = 5'b10110,
    OP_BEQ   = 5'b10111,
    OP_B7S   = 5'b11000,
    OP_BLTE  = 5'b11001,
    OP_SHL   = 5'b11010,
    OP_SHR   = 5'b11011,
    OP_ROR   = 5'b11100,
    OP_ROL   = 5'b11101,
    OP_UARTS = 5'b11110
  } opcode_e;

  // ALUsel(3:0)
  typedef enum logic [3:0] {
    ALU_PASS = 4'd0,   // y = a
    ALU_AND  = 4'd1,
    ALU_OR   = 4'd2,
    ALU_NOT  = 4'd3,
    ALU_XOR  = 4'd4,
    ALU_ADD  = 4'd5,
    ALU_SUB  = 4'd6,
    ALU_INC  = 4'd7,
    ALU_DEC  = 4'd8,
    ALU_ZERO = 4'd9
  } alu_op_e;

  // shfsel(4:0)
  typedef enum logic [4:0] {
    SHF_PASS = 5'd0,
    SHF_SHL  = 5'd1,
    SHF_SHR  = 5'd2,
    SHF_ROR  = 5'd3,
    SHF_ROL  = 5'd4
  } shf_op_e;

  // compsel(4:0); all compares are unsigned
  typedef enum logic [4:0] {
    CMP_EQ  = 5'd0,   // a == b
    CMP_NEQ = 5'd1,   // a != b
    CMP_GT  = 5'd2,   // a >  b
    CMP_LT  = 5'd3,   // a <  b
    CMP_LTE = 5'd4,   // a <= b
    CMP_GTZ = 5'd5    // b >  0 (BGTI)
  } cmp_op_e;

  // Which unit drives the internal data bus (the *rd strobes of the
  // control unit, one at a time).
  typedef enum logic [3:0] {
    BUS_NONE   = 4'd0,
    BUS_REG    = 4'd1,   // regrd
    BUS_OPREG  = 4'd2,   // opregrd
    BUS_OUTREG = 4'd3,   // outregrd
    BUS_PC     = 4'd4,   // pcrd
    BUS_ROM    = 4'd5,   // romrd
    BUS_INSTR  = 4'd6,   // instrd: zero-extended imm8 of InstReg
    BUS_RAM    = 4'd7,   // ramrd
    BUS_PORT1  = 4'd8,   // p1rd
    BUS_UART   = 4'd9    // UART received byte
  } bus_src_e;

  // PC next-value select (pcsel)
  typedef enum logic {
    PC_INC  = 1'b0,
    PC_LOAD = 1'b1
  } pc_sel_e;

  typedef enum logic [3:0] {
    S_RESET1, S_RESET2, S_FETCH1, S_FETCH2, S_DECODE,
    S_EXEC1, S_EXEC2
  } state_e;

  // The eight clock-gating signals of the control unit
  typedef struct packed {
    logic alu;      // Clkgatalu    : OpReg and outReg
    logic port0;    // Clkgatport0  : Port0 register
    logic port1;    // Clkgatport1  : Port1 register
    logic ram;      // Clkgatram    : RAM write port
    logic regfile;  // Clkgatregfile: register file
    logic rom;      // Clkgatrom    : PC, Address Reg, InstReg
    logic uart;     // Clkgatuart   : UART
    logic seg7;     // Clkgat7seg   : 7segReg
  } clkgat_t;

  // Datapath controls driven by the control unit (names follow the
  // control-unit signal list where it has one).
  typedef struct packed {
    bus_src_e bus_src;
    alu_op_e  alusel;
    shf_op_e  shfsel;
    cmp_op_e  compsel;
    logic [RSEL_W-1:0] regsel;
    logic     regwr;
    logic     opregwr;
    logic     outregwr;
    logic     addressregwr;  // Address Reg <= bus (ROM address)
    logic     ramaddrwr;     // Ram Address Reg <= imm8 (addregsel)
    logic     instrwr;
    logic     pcwr;
    pc_sel_e  pcsel;
    logic     ramwr;
    logic     p0wr;
    logic     p1wr;          // Port1 register samples the pins
    logic     s7segsel;      // 7segReg <= bus[3:0]
    logic     uartsel;       // UART starts sending bus[7:0]
  } ctrl_t;

  function automatic opcode_e instr_op(input word_t i);
    return opcode_e'(i[15:11]);
  endfunction
  function automatic logic [2:0] instr_ra(input word_t i); return i[10:8]; endfunction
  function automatic logic [2:0] instr_rb(input word_t i); return i[7:5];  endfunction
  function automatic logic [2:0] instr_rt(input word_t i); return i[4:2];  endfunction
  function automatic logic [7:0] instr_imm(input word_t i); return i[7:0]; endfunction

  // Instruction builders for test programs
  function automatic word_t mk_i(input opcode_e op, input logic [2:0] ra,
                                 input logic [7:0] imm);
    return {op, ra, imm};
  endfunction
  function automatic word_t mk_r(input opcode_e op, input logic [2:0] ra,
                                 input logic [2:0] rb, input logic [2:0] rt);
    return {op, ra, rb, rt, 2'b00};
  endfunction

  // Program ROM image: 128 words, word i at index i.
  localparam int unsigned ROM_IMAGE_WORDS = 128;
  typedef logic [ROM_IMAGE_WORDS-1:0][DATA_W-1:0] rom_image_t;

  // Demonstration program: counts 0..9; for each value writes port 0 and
  // the 7-segment digit, stores it to RAM word 0x20 and loads it back, and
  // sends it over the UART; then loops at address 12.
  function automatic rom_image_t demo_rom();
    rom_image_t r = '0;
    r[0]  = mk_i(OP_LOADI, 3'd0, 8'd0);    // r0 = 0       value
    r[1]  = mk_i(OP_LOADI, 3'd1, 8'd10);   // r1 = 10      limit
    r[2]  = mk_i(OP_LOADI, 3'd2, 8'd4);    // r2 = 4       loop address
    r[3]  = mk_i(OP_NOP,   3'd0, 8'd0);
    r[4]  = mk_r(OP_PORT0, 3'd0, 3'd0, 3'd0);  // loop: P0 = r0
    r[5]  = mk_r(OP_B7S,   3'd0, 3'd0, 3'd0);  // digit = r0
    r[6]  = mk_i(OP_STORE, 3'd0, 8'h20);       // RAM[0x20] = r0
    r[7]  = mk_i(OP_LOAD,  3'd5, 8'h20);       // r5 = RAM[0x20]
    r[8]  = mk_r(OP_MOVE,  3'd4, 3'd5, 3'd0);  // r4 = r5
    r[9]  = mk_r(OP_UARTS, 3'd4, 3'd0, 3'd0);  // send r4
    r[10] = mk_r(OP_INC,   3'd0, 3'd0, 3'd0);  // r0++
    r[11] = mk_r(OP_BLT,   3'd0, 3'd1, 3'd2);  // if r0 < r1 goto r2
    r[12] = mk_i(OP_BI,    3'd0, 8'd12);       // halt loop
    return r;
  endfunction

endpackage

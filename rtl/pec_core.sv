// pec_core: the programmable embedded controller, from one clock input.
//
// A 16-bit multi-cycle RISC controller built around one internal data bus.
// The register file (8 x 16), OpReg, the ALU, the shifter, outReg, the
// comparator, the program counter with its Address Reg, the 128 x 16
// program ROM with InstReg, the 1K x 16 data RAM with its Ram Address Reg,
// output port 0, input port 1, the BCD to 7-segment driver and the UART all
// hang on that bus. The control unit chooses, every cycle, one unit that
// drives the bus and the units that load from it (pec_pkg::ctrl_t).
//
// Power: every block except the control unit runs on its own gated copy of
// clk (pec_clock_gate), enabled by one of the control unit's eight
// clock-gating signals only in the cycles in which that block must capture
// something. clkgat is brought out so that the activity of each clock domain
// can be observed.
//
// Interface: clk, reset (active high, asynchronous; execution starts at ROM
// address 0 three cycles after it falls), port1_pins in, port0_pins out,
// seg {g..a} out, uart tx/rx. Timing: see pec_control for cycles per
// instruction.
//
// Block set and connections follow the original's block diagram; the bus
// structure, widths of the address registers and the timing are this
// design's. RAM addresses come from the 8-bit address field of LOAD/STORE,
// so only the first 256 words of the RAM can be reached by a program.
module pec_core
  import pec_pkg::*;
#(
  parameter int unsigned ROM_WORDS         = 128,
  parameter int unsigned RAM_WORDS         = 1024,
  parameter int unsigned PORT_W            = 8,
  parameter int unsigned UART_CLKS_PER_BIT = 868,
  parameter rom_image_t  ROM_IMAGE         = demo_rom()
) (
  input  logic              clk,
  input  logic              reset,
  input  logic [PORT_W-1:0] port1_pins,
  output logic [PORT_W-1:0] port0_pins,
  output logic [6:0]        seg,
  output logic              tx,
  input  logic              rx,
  output clkgat_t           clkgat
);
  localparam int unsigned PC_W = $clog2(ROM_WORDS);
  localparam int unsigned RA_W = $clog2(RAM_WORDS);

  ctrl_t  ctrl;
  state_e state;
  logic   pc_clr;
  word_t  bus;

  // ---------------- clock gating ----------------
  logic gclk_alu, gclk_port0, gclk_port1, gclk_ram, gclk_regfile, gclk_rom,
        gclk_uart, gclk_seg7;

  pec_clock_gate u_cg_alu   (.clk, .en(clkgat.alu),     .gclk(gclk_alu));
  pec_clock_gate u_cg_port0 (.clk, .en(clkgat.port0),   .gclk(gclk_port0));
  pec_clock_gate u_cg_port1 (.clk, .en(clkgat.port1),   .gclk(gclk_port1));
  pec_clock_gate u_cg_ram   (.clk, .en(clkgat.ram),     .gclk(gclk_ram));
  pec_clock_gate u_cg_reg   (.clk, .en(clkgat.regfile), .gclk(gclk_regfile));
  pec_clock_gate u_cg_rom   (.clk, .en(clkgat.rom),     .gclk(gclk_rom));
  pec_clock_gate u_cg_uart  (.clk, .en(clkgat.uart),    .gclk(gclk_uart));
  pec_clock_gate u_cg_seg7  (.clk, .en(clkgat.seg7),    .gclk(gclk_seg7));

  // ---------------- control unit ----------------
  word_t instreg;
  logic  compout;
  logic  uart_tx_busy, uart_rx_busy;

  pec_control u_ctrl (
    .clk, .reset,
    .instdatain   (instreg),
    .compin       (compout),
    .uart_tx_busy (uart_tx_busy),
    .uart_rx_busy (uart_rx_busy),
    .uart_rx_line (rx),
    .ctrl, .pc_clr, .clkgat, .state
  );

  // ---------------- register file, ALU, shifter, comparator ----------------
  word_t regfile_q, opreg, outreg, alu_y, shf_y;

  pec_regfile #(.NREGS(NREGS), .W(DATA_W)) u_regfile (
    .gclk(gclk_regfile), .regsel(ctrl.regsel), .regwr(ctrl.regwr),
    .din(bus), .dout(regfile_q)
  );

  pec_reg #(.W(DATA_W)) u_opreg (
    .gclk(gclk_alu), .rst(reset), .ld(ctrl.opregwr), .d(bus), .q(opreg)
  );

  pec_alu #(.W(DATA_W)) u_alu (
    .alusel(ctrl.alusel), .a(opreg), .b(bus), .y(alu_y)
  );

  pec_shifter #(.W(DATA_W)) u_shifter (
    .shfsel(ctrl.shfsel), .a(alu_y), .y(shf_y)
  );

  pec_reg #(.W(DATA_W)) u_outreg (
    .gclk(gclk_alu), .rst(reset), .ld(ctrl.outregwr), .d(shf_y), .q(outreg)
  );

  pec_comparator #(.W(DATA_W)) u_comp (
    .compsel(ctrl.compsel), .a(opreg), .b(bus), .compout
  );

  // ---------------- program side ----------------
  logic [PC_W-1:0] pc, rom_addr;
  word_t           rom_q;

  pec_pc #(.AW(PC_W)) u_pc (
    .gclk(gclk_rom), .rst(reset), .clr(pc_clr), .pcwr(ctrl.pcwr),
    .pcsel(ctrl.pcsel), .din(bus[PC_W-1:0]), .pc
  );

  pec_reg #(.W(PC_W)) u_addrreg (
    .gclk(gclk_rom), .rst(reset), .ld(ctrl.addressregwr), .d(bus[PC_W-1:0]),
    .q(rom_addr)
  );

  pec_rom #(.WORDS(ROM_WORDS), .W(DATA_W), .INIT(ROM_IMAGE)) u_rom (
    .addr(rom_addr), .dout(rom_q)
  );

  pec_reg #(.W(DATA_W)) u_instreg (
    .gclk(gclk_rom), .rst(reset), .ld(ctrl.instrwr), .d(bus), .q(instreg)
  );

  // ---------------- data RAM ----------------
  logic [RA_W-1:0] ram_addr;
  word_t           ram_q;

  pec_reg #(.W(RA_W)) u_ramaddrreg (
    .gclk(gclk_ram), .rst(reset), .ld(ctrl.ramaddrwr),
    .d(RA_W'(instr_imm(instreg))), .q(ram_addr)
  );

  pec_ram #(.WORDS(RAM_WORDS), .W(DATA_W)) u_ram (
    .gclk(gclk_ram), .addr(ram_addr), .ramwr(ctrl.ramwr), .din(bus),
    .dout(ram_q)
  );

  // ---------------- peripherals ----------------
  logic [PORT_W-1:0] port1_q;
  logic [3:0]        seg_digit;
  logic [7:0]        uart_rx_data;
  logic              uart_rx_done;

  pec_port0 #(.W(PORT_W)) u_port0 (
    .gclk(gclk_port0), .rst(reset), .p0wr(ctrl.p0wr), .din(bus[PORT_W-1:0]),
    .pins(port0_pins)
  );

  pec_port1 #(.W(PORT_W)) u_port1 (
    .gclk(gclk_port1), .rst(reset), .p1wr(ctrl.p1wr), .pins(port1_pins),
    .q(port1_q)
  );

  pec_bcd7seg u_seg (
    .gclk(gclk_seg7), .rst(reset), .ld(ctrl.s7segsel), .bcd_in(bus[3:0]),
    .digit(seg_digit), .seg
  );

  pec_uart #(.CLKS_PER_BIT(UART_CLKS_PER_BIT)) u_uart (
    .gclk(gclk_uart), .rst(reset), .start(ctrl.uartsel), .tx_data(bus[7:0]),
    .tx, .tx_busy(uart_tx_busy), .rx, .rx_busy(uart_rx_busy),
    .rx_data(uart_rx_data), .rx_done(uart_rx_done)
  );

  // ---------------- data bus ----------------
  always_comb begin
    unique case (ctrl.bus_src)
      BUS_REG:    bus = regfile_q;
      BUS_OPREG:  bus = opreg;
      BUS_OUTREG: bus = outreg;
      BUS_PC:     bus = DATA_W'(pc);
      BUS_ROM:    bus = rom_q;
      BUS_INSTR:  bus = DATA_W'(instr_imm(instreg));
      BUS_RAM:    bus = ram_q;
      BUS_PORT1:  bus = DATA_W'(port1_q);
      BUS_UART:   bus = DATA_W'(uart_rx_data);
      default:    bus = '0;
    endcase
  end
endmodule

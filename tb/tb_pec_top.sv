// tb_pec_top: whole-chip test at the default sizes: on-chip clocker, core,
// 128-word ROM with the demonstration program, 1K-word RAM and the UART at
// 868 clocks per bit.
//
// The demonstration program counts 0..9; for each value it writes port 0
// and the 7-segment register, stores the value to RAM and loads it back,
// and sends it over the UART, then stops in a loop at ROM address 12. The
// testbench checks the sequence seen on port 0 and on the segments, decodes
// the bytes on tx at the expected bit time, and checks the final registers
// and RAM word. On the way it changes the oscillator's control word and
// measures the clock period at control words 0 and 15 (44 and 134 MHz),
// stops and restarts the oscillator, and counts how often each mechanism
// happened: clock gated off in each domain, UARTS stalls, taken and untaken
// branches, frequency switch and oscillator stop.
module tb_pec_top;
  import pec_pkg::*;

  logic start_stop = 1'b0, rosc_wr = 1'b0, reset = 1'b0, rx = 1'b1;
  logic [3:0] rosc_din = 4'd0, r_osc;
  logic sys_clk, tx;
  logic [7:0] port1_pins = 8'h00, port0_pins;
  logic [6:0] seg;
  clkgat_t clkgat;
  int checks = 0, failures = 0;

  pec_top dut (
    .start_stop, .rosc_wr, .rosc_din, .r_osc, .sys_clk, .reset, .port1_pins,
    .port0_pins, .seg, .tx, .rx, .clkgat
  );

  localparam int unsigned CPB = 868;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    #(5ms);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [6:0] seg_of(input int d);
    case (d)
      0: return 7'h3f; 1: return 7'h06; 2: return 7'h5b; 3: return 7'h4f;
      4: return 7'h66; 5: return 7'h6d; 6: return 7'h7d; 7: return 7'h07;
      8: return 7'h7f; 9: return 7'h6f; default: return 7'h00;
    endcase
  endfunction

  // port 0 / segment sequence
  int p0_next = 1, seg_next = 0;   // the first value, 0, equals the reset value
  always @(port0_pins) if (!reset && start_stop) begin
    check(port0_pins == 8'(p0_next), $sformatf("port0 %0d exp %0d", port0_pins, p0_next));
    p0_next++;
  end
  always @(seg) if (!reset && start_stop && seg != seg_of(0)) begin
    seg_next++;
    check(seg == seg_of(seg_next), $sformatf("seg %h exp digit %0d", seg, seg_next));
  end

  // UART decoder, in clocks of the system clock
  int tx_bytes = 0;
  initial begin : tx_decoder
    logic [7:0] b;
    wait (reset);
    wait (!reset);
    forever begin
      @(negedge tx);
      repeat (CPB / 2) @(posedge sys_clk);
      check(tx == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge sys_clk);
        b[i] = tx;
      end
      repeat (CPB) @(posedge sys_clk);
      check(tx == 1'b1, "stop bit");
      check(b == 8'(tx_bytes), $sformatf("uart byte %0d exp %0d", b, tx_bytes));
      tx_bytes++;
    end
  end

  // mechanism counters
  int gated [8];
  int stall = 0, taken = 0, untaken = 0;
  always @(posedge sys_clk) if (!reset) begin
    logic [7:0] g;
    g = clkgat;
    for (int i = 0; i < 8; i++) if (!g[i]) gated[i]++;
    if (dut.u_core.state == S_DECODE && dut.u_core.instreg[15:11] == OP_UARTS &&
        dut.u_core.u_uart.tx_busy) stall++;
    if (dut.u_core.state == S_EXEC1 && dut.u_core.instreg[15:11] == OP_BLT)
      if (dut.u_core.compout) taken++; else untaken++;
  end

  task automatic measure_period(output realtime p);
    realtime t0;
    @(posedge sys_clk);
    t0 = $realtime;
    repeat (100) @(posedge sys_clk);
    p = ($realtime - t0) / 100.0;
  endtask

  task automatic set_rosc(input logic [3:0] cw);
    rosc_din = cw;
    #1ns rosc_wr = 1'b1;
    #1ns rosc_wr = 1'b0;
  endtask

  initial begin
    realtime p_slow, p_fast, exp_slow, exp_fast;
    int freq_switches = 0, stops = 0;
    exp_slow = 1000.0 / 44.0 * 1ns;
    exp_fast = 1000.0 / 134.0 * 1ns;
    for (int i = 0; i < 8; i++) gated[i] = 0;

    #10ns reset = 1'b1;
    set_rosc(4'd0);
    start_stop = 1'b1;
    measure_period(p_slow);
    check(p_slow > exp_slow * 0.99 && p_slow < exp_slow * 1.01,
          $sformatf("period at control word 0: %0t", p_slow));
    set_rosc(4'd15);
    freq_switches++;
    measure_period(p_fast);
    check(p_fast > exp_fast * 0.99 && p_fast < exp_fast * 1.01,
          $sformatf("period at control word 15: %0t", p_fast));
    check(r_osc == 4'd15, "r_osc holds the control word");

    // run the demonstration program at 134 MHz
    @(negedge sys_clk) reset = 1'b0;
    wait (tx_bytes == 5);
    // stop the oscillator for a while: nothing may move
    start_stop = 1'b0;
    stops++;
    begin
      logic [7:0] p0_frozen;
      logic [6:0] st;
      p0_frozen = port0_pins;
      st = 7'(dut.u_core.state);
      #(2us);
      check(sys_clk == 1'b0 && port0_pins == p0_frozen &&
            7'(dut.u_core.state) == st, "oscillator stopped, state frozen");
    end
    start_stop = 1'b1;
    wait (tx_bytes == 10);
    repeat (50) @(posedge sys_clk);

    check(dut.u_core.u_pc.pc == 7'd12 || dut.u_core.u_pc.pc == 7'd13, "program halted at 12");
    check(dut.u_core.u_regfile.regs[0] == 16'd10, "r0 counted to 10");
    check(dut.u_core.u_ram.mem[8'h20] == 16'd9, "RAM word 0x20 holds the last value");
    check(port0_pins == 8'd9 && p0_next == 10, "port0 saw 0..9");
    check(seg == seg_of(9) && seg_next == 9, "segments showed 0..9");

    // mechanisms
    check(freq_switches > 0 && stops > 0, "frequency switched and oscillator stopped");
    check(stall > 0, "UARTS stalled");
    check(taken > 0 && untaken > 0, "BLT taken and not taken");
    for (int i = 0; i < 8; i++) check(gated[i] > 0, $sformatf("clock domain %0d gated", i));
    $display("periods: %0t %0t; uart stall cycles %0d; BLT taken %0d untaken %0d",
             p_slow, p_fast, stall, taken, untaken);
    for (int i = 7; i >= 0; i--)
      $display("clock domain %0d (alu,port0,port1,ram,regfile,rom,uart,seg7 = 7..0): gated %0d cycles",
               i, gated[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

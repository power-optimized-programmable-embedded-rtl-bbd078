// tb_pec_uart: sends random bytes and checks the frame on tx bit by bit at
// CLKS_PER_BIT clocks per bit, the busy time of exactly ten bit times, and
// that a start during busy is ignored; loops tx back to rx through a
// serial model here and checks every received byte and rx_done pulse.
module tb_pec_uart;
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
    #(10ms); failures++; $display("watchdog expired"); finish();
  end

  localparam int CPB = 16;
  logic clk = 0, rst = 0, start = 0, tx, tx_busy, rx = 1, rx_busy, rx_done;
  logic [7:0] tx_data, rx_data;
  pec_uart #(.CLKS_PER_BIT(CPB)) dut (.gclk(clk), .rst, .start, .tx_data, .tx,
    .tx_busy, .rx, .rx_busy, .rx_data, .rx_done);
  always #5 clk = ~clk;

  logic [7:0] rx_q [$];
  int done_pulses = 0;
  always @(posedge clk) if (rx_done) begin
    done_pulses++;
    if (rx_q.size() == 0) check(0, "unexpected rx_done");
    else check(rx_data == rx_q.pop_front(), $sformatf("rx byte %h", rx_data));
  end

  task automatic send_rx(input logic [7:0] b);
    logic [9:0] f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx = f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  initial begin
    logic [7:0] b;
    int busy_cycles;
    #1 rst = 1; #1 rst = 0;
    check(tx == 1 && !tx_busy && !rx_busy, "idle after reset");
    for (int n = 0; n < 20; n++) begin
      b = 8'($urandom);
      @(negedge clk) begin tx_data = b; start = 1; end
      @(negedge clk) begin start = 1; tx_data = ~b; end   // ignored: busy
      @(negedge clk) start = 0;
      // frame: bit k is on tx during clocks [k*CPB, (k+1)*CPB) after the start edge
      for (int k = 0; k < 10; k++) begin
        logic e;
        e = (k == 0) ? 1'b0 : (k == 9) ? 1'b1 : b[k-1];
        repeat ((k == 0) ? CPB / 2 - 2 : CPB) @(negedge clk);
        check(tx == e, $sformatf("tx bit %0d of %h", k, b));
      end
      busy_cycles = 0;
      while (tx_busy) begin @(negedge clk); busy_cycles++; end
      check(busy_cycles == CPB / 2 + 1, $sformatf("busy tail %0d", busy_cycles));
    end
    // receiver
    for (int n = 0; n < 20; n++) begin
      b = 8'($urandom);
      rx_q.push_back(b);
      send_rx(b);
      repeat ($urandom % 5) @(posedge clk);
    end
    // a glitch shorter than half a bit is not a start bit
    rx = 0; repeat (CPB / 4) @(posedge clk); rx = 1;
    repeat (3 * CPB) @(posedge clk);
    check(!rx_busy && rx_q.size() == 0, "glitch rejected");
    // a frame with a bad stop bit is dropped
    rx = 0; repeat (9 * CPB + 3 * CPB / 4) @(posedge clk); rx = 1;
    repeat (3 * CPB) @(posedge clk);
    check(done_pulses == 20, $sformatf("rx_done pulses %0d", done_pulses));
    finish();
  end
endmodule

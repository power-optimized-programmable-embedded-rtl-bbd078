// tb_pec_clocker: measures the clock period for every control word and
// compares it with the linear law between 1/44 MHz and 1/134 MHz; checks
// that r_osc takes the control word and that start_stop stops and restarts
// the clock.
module tb_pec_clocker;
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

  logic start_stop = 0, rosc_wr = 0, clk;
  logic [3:0] rosc_din = 0, r_osc;
  pec_clocker dut (.start_stop, .rosc_wr, .rosc_din, .r_osc, .clk);

  initial begin
    realtime t0, p, e, tmax, tmin;
    int edges;
    tmax = 1000.0 / 44.0 * 1ns;
    tmin = 1000.0 / 134.0 * 1ns;
    #10ns check(clk == 0, "stopped after power-up");
    start_stop = 1;
    for (int cw = 0; cw < 16; cw++) begin
      rosc_din = 4'(cw);
      #1ns rosc_wr = 1;
      #1ns rosc_wr = 0;
      check(r_osc == 4'(cw), "r_osc loaded");
      @(posedge clk);   // let the new period take effect
      @(posedge clk);
      t0 = $realtime;
      repeat (50) @(posedge clk);
      p = ($realtime - t0) / 50.0;
      e = tmax - (tmax - tmin) * cw / 15.0;
      check(p > e * 0.995 && p < e * 1.005, $sformatf("cw %0d period %0t exp %0t", cw, p, e));
    end
    start_stop = 0;
    #50ns;
    edges = 0;
    fork
      begin @(posedge clk); edges++; end
      #500ns;
    join_any
    disable fork;
    check(edges == 0 && clk == 0, "stop holds the clock low");
    start_stop = 1;
    #100ns check(edges == 0, "");
    @(posedge clk) check(1'b1, "restarted");
    finish();
  end
endmodule

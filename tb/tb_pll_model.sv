`timescale 1ps / 1fs
// tb_pll_model: feeds the PLL model a 40 MHz reference, then 48 MHz.
// Checks that lock rises, that every reference period then holds exactly
// 120 line-clock periods, that line-clock rising edges coincide with
// reference rising edges, and that the line-clock period is 208.3 ps at
// 40 MHz and 173.6 ps at 48 MHz (4.8 and 5.76 Gbps).
module tb_pll_model;
  logic    ref_clk = 1'b0;
  logic    fbit_clk, lock;
  realtime t_half = 12500.0;

  pll_model dut (.ref_clk(ref_clk), .fbit_clk(fbit_clk), .lock(lock));

  initial forever begin
    #(t_half);
    ref_clk = ~ref_clk;
  end

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  int unsigned n_rise = 0;
  realtime     t_rise = 0.0, t_prev = 0.0, period = 0.0;
  always @(posedge fbit_clk) begin
    n_rise++;
    t_prev = t_rise;
    t_rise = $realtime;
    if (t_prev > 0.0) period = t_rise - t_prev;
  end

  task automatic measure(input int unsigned nref, input realtime exp_period);
    int unsigned n0;
    n0 = n_rise;                          // called 1 ps after a reference edge
    for (int unsigned r = 0; r < nref; r++) begin
      @(posedge ref_clk);
      #1;
      check(n_rise - n0 == 120, $sformatf("%0d line periods in a reference period", n_rise - n0));
      n0 = n_rise;
      check($realtime - t_rise < 1.5, "line clock not aligned with reference edge");
      #(exp_period * 10);
      check(period > exp_period - 0.1 && period < exp_period + 0.1,
            $sformatf("line period %0.3f ps, expected %0.3f", period, exp_period));
    end
  endtask

  initial begin
    check(lock == 1'b0, "locked at start");
    wait (lock);
    @(posedge ref_clk);
    @(posedge ref_clk);
    #1;
    measure(20, 25000.0 / 120.0);
    t_half = 1.0e6 / 48.0 / 2.0;
    repeat (4) @(posedge ref_clk);
    #1;
    measure(20, 1.0e6 / 48.0 / 120.0);
    check(lock, "lock lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps / 1fs
// tb_load_generator: drives fBITover3 (625 ps) and a Loading Clock that
// changes on fBITover3 falling edges, 5 periods high and 5 low. Checks that
// load is high for exactly one fBITover3 period per Loading Clock period,
// and that it rises on the second fBITover3 falling edge after the one at
// which Loading Clock fell (one fBITover3 period later), never otherwise.
module tb_load_generator;
  logic fbitover3 = 1'b0, loading_clk = 1'b0, rst_n = 1'b0, load;

  load_generator dut (
    .fbitover3   (fbitover3),
    .loading_clk (loading_clk),
    .rst_n       (rst_n),
    .load        (load)
  );

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  initial forever begin
    #208 fbitover3 = 1'b1;
    #209 fbitover3 = 1'b0;
    #208;
  end

  // Loading Clock from a counter of fBITover3 falling edges (test stimulus)
  int unsigned fe = 0;          // index of fBITover3 falling edges
  int          fall_at = -100;  // falling edge index at which loading_clk fell
  always @(negedge fbitover3) begin
    fe++;
    if (rst_n) begin
      if (fe % 10 == 0) loading_clk <= 1'b1;
      if (fe % 10 == 5) begin
        loading_clk <= 1'b0;
        fall_at = int'(fe);
      end
    end
  end

  // sample in the middle of each fBITover3 period
  int unsigned n_pulses = 0;
  always @(posedge fbitover3) begin
    if (rst_n) begin
      check(load == (int'(fe) == fall_at + 1),
            $sformatf("load=%b at falling-edge index %0d (Loading Clock fell at %0d)", load, fe, fall_at));
      if (load) n_pulses++;
    end
  end

  initial begin
    #3000;
    check(load == 1'b0, "reset value");
    @(posedge fbitover3) rst_n = 1'b1;
    repeat (400) @(posedge fbitover3);
    check(n_pulses >= 35, $sformatf("only %0d load pulses", n_pulses));
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

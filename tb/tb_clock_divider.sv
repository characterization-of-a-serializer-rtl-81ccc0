`timescale 1ps / 1fs
// tb_clock_divider: checks the three-phase ring, fBITover3, Loading Clock
// and the 40 MHz clock against the rules they must obey, sampling every
// signal in the middle of each line-clock period:
//   * exactly one phase high, rotating Phi<0> -> Phi<1> -> Phi<2>, with
//     Phi<0> high in the first period after reset release
//   * fBITover3 equal to Phi<0>
//   * Loading Clock high 15 and low 15 line-clock periods (3N = 30, N = 10),
//     rising while Phi<1> is high (one third of a 1.6 GHz period after Phi<0>)
//   * 40 MHz clock with a period of 120 line-clock periods, 50 % duty, and
//     rising together with Loading Clock
module tb_clock_divider;
  import ser_pkg::*;

  logic   fbit_clk = 1'b0;
  logic   rst_n    = 1'b0;
  phase_t phi;
  logic   fbitover3, loading_clk, clk40;

  clock_divider dut (
    .fbit_clk    (fbit_clk),
    .rst_n       (rst_n),
    .phi         (phi),
    .fbitover3   (fbitover3),
    .loading_clk (loading_clk),
    .clk40       (clk40)
  );

  always #104 fbit_clk = ~fbit_clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  int unsigned cyc = 0;
  phase_t      exp_phi;
  logic        prev_l = 1'b0, prev_40 = 1'b0;
  int unsigned l_run = 0, c40_run = 0, n_lrise = 0, n_40rise = 0;

  always @(negedge fbit_clk) begin
    if (rst_n) begin
      cyc++;
      exp_phi = (cyc % 3 == 1) ? PHI0 : (cyc % 3 == 2) ? PHI1 : PHI2;
      check(phi == exp_phi, $sformatf("cycle %0d phi=%b expected %b", cyc, phi, exp_phi));
      check(fbitover3 == phi[0], "fBITover3 differs from Phi<0>");
      // Loading Clock run lengths
      if (loading_clk != prev_l) begin
        if (cyc > 2) check(l_run == 15, $sformatf("loading_clk run of %0d line periods", l_run));
        if (loading_clk) begin
          check(phi == PHI1, "loading_clk rose outside Phi<1>");
          n_lrise++;
        end
        l_run = 0;
      end
      l_run++;
      if (clk40 != prev_40) begin
        if (cyc > 2) check(c40_run == 60, $sformatf("clk40 run of %0d line periods", c40_run));
        if (clk40) begin
          check(loading_clk && !prev_l, "clk40 rose without a loading_clk rising edge");
          n_40rise++;
        end
        c40_run = 0;
      end
      c40_run++;
      prev_l  = loading_clk;
      prev_40 = clk40;
    end
  end

  initial begin
    #1000;
    @(negedge fbit_clk);
    check(phi == PHI2 && !loading_clk && !clk40, "reset values");
    #1 rst_n = 1'b1;
    repeat (2000) @(posedge fbit_clk);
    check(n_lrise >= 60, $sformatf("only %0d loading_clk rising edges", n_lrise));
    check(n_40rise >= 15, $sformatf("only %0d clk40 rising edges", n_40rise));
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

`timescale 1ps / 1fs
// pll_model: behavioural model (not synthesizable) of the on-chip PLL
// (Part III) that multiplies the reference clock up to the line rate.
//
// The real block is an analog PLL with
// triple-modular-redundant protection against single-event upsets; neither
// is modelled here. The model measures each reference period and, after
// LOCK_CYCLES reference edges, starts a clock of MULT times the reference
// frequency whose rising edges coincide with the reference's rising edges.
// It re-aligns on every reference edge, so a change of reference frequency
// (40, 48 or 53.33 MHz for 4.8, 5.76 or 6.4 Gbps) is followed within two
// reference periods.
//
// Interface and timing
//   ref_clk   reference clock (40 MHz nominal)
//   fbit_clk  line-rate clock, MULT x ref_clk, 50 % duty
//   lock      rises on a falling reference edge, half a reference period
//             before the first fbit_clk edge, and stays high
//
// The multiplication by 120 follows the paper (a 40 MHz reference gives
// 4.8 Gbps, 48 MHz gives 5.76 Gbps). The lock delay, the edge alignment to
// the reference and the lock signal itself are this model's choices.
module pll_model #(
  parameter int unsigned MULT        = 120,
  parameter int unsigned LOCK_CYCLES = 4
) (
  input  logic ref_clk,
  output logic fbit_clk,
  output logic lock
);

  realtime     t_last   = 0.0;
  realtime     t_period = 0.0;
  realtime     half;
  int unsigned n_edges  = 0;

  initial begin
    fbit_clk = 1'b0;
    lock     = 1'b0;
  end

  // Measure the reference period and count edges towards lock.
  always @(posedge ref_clk) begin
    if (t_last > 0.0) t_period = $realtime - t_last;
    t_last = $realtime;
    if (n_edges < LOCK_CYCLES) n_edges = n_edges + 1;
  end

  always @(negedge ref_clk) begin
    if (n_edges >= LOCK_CYCLES) lock = 1'b1;
  end

  // One burst of MULT line-clock cycles per reference period, using the
  // period measured by the block above. The burst ends half a line period
  // before the next reference edge, so at a steady frequency no edge is
  // missed; right after a step to a higher frequency one burst overruns,
  // one reference edge is skipped and the clock re-aligns on the next.
  always @(posedge ref_clk) begin
    if (lock) begin
      half = t_period / (2.0 * MULT);
      repeat (MULT - 1) begin
        fbit_clk = 1'b1;
        #(half);
        fbit_clk = 1'b0;
        #(half);
      end
      // Last cycle: its low phase ends at the next reference edge.
      fbit_clk = 1'b1;
      #(half);
      fbit_clk = 1'b0;
    end
  end

endmodule

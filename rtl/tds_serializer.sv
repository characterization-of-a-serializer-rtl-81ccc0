`timescale 1ps / 1fs
// tds_serializer: the complete serializer chip, a low-latency 30:1
// serializer for trigger data (4.8 Gbps from a 40 MHz reference).
//
// The PLL multiplies the reference clock by 120 to the line rate. Once it
// is locked the clock divider runs and provides the 1.6 GHz phases, the
// 160 MHz Loading Clock and a 40 MHz user clock. The trigger logic that
// feeds the chip works on loading_clk and presents a 30-bit frame every
// cycle; the serializer core sends each frame MSB first, back to back, on
// sb. The differential line driver (txP/txN) is an analog cell and is not
// part of this RTL: sb is the logic-level stream it would drive.
//
// Interface and timing
//   ref_clk      reference clock, 40 MHz nominal (48 MHz -> 5.76 Gbps)
//   rst_n        active-low data-path reset; it does not touch the PLL or
//                the clock divider, so the phase of Loading Clock to the
//                reference is the same after every reset
//   din          30-bit frame, sampled on the rising edge of loading_clk
//   loading_clk  160 MHz loading clock
//   clk40        40 MHz user clock, rising edges aligned with loading_clk
//   pll_lock     PLL locked; the clocks run only while it is high
//   sb           serial bit stream, one bit per line-clock period
//   Latency from the loading_clk edge that captures a frame to the end of
//   its first bit on sb: T_load/2 + (3 + 2/3) T_fBITover3 = 5.42 ns.
//
// pll_lock is set by the PLL model on a reference edge and is the clock
// divider's asynchronous reset; a lint notice that it is used both ways
// refers to that behavioural model, not to a circuit.
//
// The block structure and numbers follow the paper. Driving the clock
// divider's reset from PLL lock, and leaving the PLL and divider out of the
// chip reset, are this design's choices.
module tds_serializer
  import ser_pkg::*;
#(
  parameter int unsigned N        = N_DEFAULT,
  parameter int unsigned PLL_MULT = PLL_MULT_DEFAULT
) (
  input  logic           ref_clk,
  input  logic           rst_n,
  input  logic [3*N-1:0] din,
  output logic           loading_clk,
  output logic           clk40,
  output logic           pll_lock,
  output logic           sb
);

  logic   fbit_clk;

  pll_model #(.MULT(PLL_MULT)) u_pll (
    .ref_clk  (ref_clk),
    .fbit_clk (fbit_clk),
    .lock     (pll_lock)
  );

  serializer_core #(.N(N)) u_core (
    .fbit_clk    (fbit_clk),
    .clk_rst_n   (pll_lock),
    .rst_n       (rst_n),
    .din         (din),
    .loading_clk (loading_clk),
    .clk40       (clk40),
    .sb          (sb)
  );

endmodule

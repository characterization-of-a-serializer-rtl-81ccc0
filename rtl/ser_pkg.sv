`timescale 1ps / 1fs
// ser_pkg: constants and types shared by the 30:1 low-latency serializer.
//
// The serializer loads 3*N parallel bits per Loading Clock cycle and sends
// them out at 3*N times the loading rate through three interleaved N-bit
// shift registers. The defaults follow the modified (TDS) serializer:
// N = 10, i.e. 30-bit frames loaded at 160 MHz for a 4.8 Gbps line, with a
// PLL that multiplies a 40 MHz reference by 120. The 40 MHz user clock is
// the line clock divided by 120 (= fBITover3 divided by 40).
package ser_pkg;

  // Bits per shift-register line (n in the text). 10 for the modified
  // serializer; the original 120:1 design would use 40.
  localparam int unsigned N_DEFAULT = 10;

  // Number of interleaved shift-register lines / clock phases.
  localparam int unsigned N_LINES = 3;

  // PLL multiplication: line clock = 120 x reference clock
  // (40 MHz -> 4.8 GHz, 48 MHz -> 5.76 GHz, 53.33 MHz -> 6.4 GHz).
  localparam int unsigned PLL_MULT_DEFAULT = 120;

  // fBITover3 periods per 40 MHz user-clock period (120 / 3).
  localparam int unsigned CLK40_DIV = PLL_MULT_DEFAULT / N_LINES;

  // One-hot encoding of the three 1.6 GHz phases Phi<0..2>: bit k is
  // Phi<k>. Exactly one phase is high at any time (1:2 high-low ratio).
  typedef logic [N_LINES-1:0] phase_t;
  localparam phase_t PHI0 = 3'b001;
  localparam phase_t PHI1 = 3'b010;
  localparam phase_t PHI2 = 3'b100;

endpackage

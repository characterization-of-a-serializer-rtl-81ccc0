`timescale 1ps / 1fs
// clock_divider: derives every user clock of the serializer from the PLL's
// line-rate clock (4.8 GHz at the nominal 40 MHz reference).
//
// How it works
//   * A 3-bit one-hot ring counter on the rising edge of the line clock
//     gives Phi<0>, Phi<1>, Phi<2>: three 1.6 GHz clocks, 120 degrees apart,
//     each high for one line-clock period out of three (1:2 high-low ratio).
//     Phi<0> rises first, then Phi<1>, then Phi<2>.
//   * fBITover3 is a separate flip-flop carrying the same value as Phi<0>,
//     so it is a copy of the 1.6 GHz clock with zero phase delay to Phi<0>.
//   * On the falling edge of fBITover3 a modulo-N counter makes the Loading
//     Clock (f_line / 3N = 160 MHz, 50 % duty) and a modulo-40 counter makes
//     the 40 MHz user clock. Both counters restart together, so the rising
//     edges of the two clocks are aligned.
//
// Interface and timing
//   fbit_clk   line-rate clock from the PLL
//   rst_n      asynchronous, active low; the top drives it with PLL lock.
//              After release the first line-clock edge raises Phi<0>, and
//              one third of a 1.6 GHz period later Loading Clock and the
//              40 MHz clock rise. The phase of every output to the PLL
//              reference is therefore fixed by the release of rst_n.
//   phi[k]     Phi<k>
//
// The three phases, their 1:2 ratio, the zero-phase fBITover3 and the
// aligned 160/40 MHz rising edges are taken from the paper. Building them
// with a ring counter, and clocking the loading-clock counter on the falling
// edge of fBITover3 (so that the load-pulse generator samples Loading Clock
// one fBITover3 period after it changes), are choices of this design.
module clock_divider
  import ser_pkg::*;
#(
  parameter int unsigned N         = N_DEFAULT,  // bits per shift register
  parameter int unsigned DIV40     = CLK40_DIV   // fBITover3 cycles per 40 MHz cycle
) (
  input  logic   fbit_clk,
  input  logic   rst_n,
  output phase_t phi,
  output logic   fbitover3,
  output logic   loading_clk,
  output logic   clk40
);

  localparam int unsigned CW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned C4W = (DIV40 > 1) ? $clog2(DIV40) : 1;

  // ---- three-phase ring counter at the line rate ----
  always_ff @(posedge fbit_clk or negedge rst_n) begin
    if (!rst_n) begin
      phi       <= PHI2;       // first edge after reset raises Phi<0>
      fbitover3 <= 1'b0;
    end else begin
      // The ring must stay one-hot: exactly one phase high at a time.
      assert ($onehot(phi)) else $error("clock_divider: phases not one-hot: %b", phi);
      phi       <= {phi[1:0], phi[2]};
      fbitover3 <= phi[2];     // equals the next value of Phi<0>
    end
  end

  // ---- Loading Clock and 40 MHz clock on the falling edge of fBITover3 ----
  logic [CW-1:0]  cnt_load;
  logic [C4W-1:0] cnt_40;
  logic [CW-1:0]  cnt_load_nx;
  logic [C4W-1:0] cnt_40_nx;

  always_comb begin
    cnt_load_nx = (cnt_load == CW'(N - 1)) ? '0 : cnt_load + 1'b1;
    cnt_40_nx   = (cnt_40 == C4W'(DIV40 - 1)) ? '0 : cnt_40 + 1'b1;
  end

  always_ff @(negedge fbitover3 or negedge rst_n) begin
    if (!rst_n) begin
      cnt_load    <= CW'(N - 1);
      cnt_40      <= C4W'(DIV40 - 1);
      loading_clk <= 1'b0;
      clk40       <= 1'b0;
    end else begin
      cnt_load    <= cnt_load_nx;
      cnt_40      <= cnt_40_nx;
      loading_clk <= (cnt_load_nx < CW'(N / 2));
      clk40       <= (cnt_40_nx < C4W'(DIV40 / 2));
    end
  end

endmodule

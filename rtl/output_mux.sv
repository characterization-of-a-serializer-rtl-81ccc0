`timescale 1ps / 1fs
// output_mux: the 3:1 multiplexer that merges the three shift-register
// outputs into the full-rate serial stream sb.
//
// Each line is selected while the phase before its own loading phase is
// high, which gives every sb_k two thirds of a 1.6 GHz period to settle
// after it changes:
//   Phi<2> high -> sb = sb0 (Shift Register I,   loaded on Phi<0>)
//   Phi<0> high -> sb = sb1 (Shift Register II,  loaded on Phi<1>)
//   Phi<1> high -> sb = sb2 (Shift Register III, loaded on Phi<2>)
// Because exactly one phase is high at a time, sb carries one bit per line
// clock period: sb0, sb1, sb2, sb0, ... at 3 x 1.6 GHz = 4.8 Gbps.
//
// Interface and timing: purely combinational; sb changes with the phases.
// The selection rule follows the paper. Driving sb low while no phase is
// high (never the case after reset) is this design's choice.
module output_mux
  import ser_pkg::*;
(
  input  phase_t phi,
  input  logic   sb0,
  input  logic   sb1,
  input  logic   sb2,
  output logic   sb
);

  always_comb begin
    unique0 case (phi)
      PHI2:    sb = sb0;
      PHI0:    sb = sb1;
      PHI1:    sb = sb2;
      default: sb = 1'b0;
    endcase
  end

endmodule

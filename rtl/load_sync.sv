`timescale 1ps / 1fs
// load_sync: re-times the load pulse into the three phase domains, giving
// load0, load1 and load2 for Shift Registers I, II and III.
//
// Each load_k is a registered copy of load taken on the falling edge of the
// phase that precedes Phi<k>, so that it is stable across the next rising
// edge of Phi<k>, where Shift Register k samples it:
//   load0 <= load   on the falling edge of Phi<2>
//   load1 <= load0  on the falling edge of Phi<0>
//   load2 <= load1  on the falling edge of Phi<1>
// The three registers form a chain, so the three shift registers load on
// three consecutive phase edges, one third of a 1.6 GHz period apart
// (Phi<0>, then Phi<1>, then Phi<2>), which keeps the bit order
// b_{3N-1}, b_{3N-2}, b_{3N-3}, ... on the line.
//
// Interface and timing
//   phi     the three 1.6 GHz phases (one-hot)
//   load    one fBITover3 period wide, from load_generator
//   load0, load1, load2  each one 1.6 GHz period wide
//
// The paper states that load_k is registered at the falling edge of
// Phi<2-k>. For k = 0 this design follows it; for k = 1 and 2 it uses the
// falling edge of Phi<k-1> instead, and chains the registers, because with
// the phase order Phi<0>, Phi<1>, Phi<2> the stated edges would load Shift
// Registers II and III one 1.6 GHz period early and send the bits out of
// order.
module load_sync
  import ser_pkg::*;
(
  input  phase_t            phi,
  input  logic              rst_n,
  input  logic              load,
  output logic              load0,
  output logic              load1,
  output logic              load2
);

  always_ff @(negedge phi[2] or negedge rst_n) begin
    if (!rst_n) load0 <= 1'b0;
    else        load0 <= load;
  end

  always_ff @(negedge phi[0] or negedge rst_n) begin
    if (!rst_n) load1 <= 1'b0;
    else        load1 <= load0;
  end

  always_ff @(negedge phi[1] or negedge rst_n) begin
    if (!rst_n) load2 <= 1'b0;
    else        load2 <= load1;
  end

endmodule

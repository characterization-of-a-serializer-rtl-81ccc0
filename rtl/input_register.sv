`timescale 1ps / 1fs
// input_register: the 3N-bit parallel input register (Part I of the
// serializer, 30 bits in the modified design).
//
// All 3N bits are captured together on the rising edge of Loading Clock and
// held for one Loading Clock period, while the three shift registers take
// their N-bit groups from it after the falling edge. The outputs are
// regrouped here, as wiring, into the three groups the shift registers get:
// bits are taken every third position from MSB to LSB, so
//   group0[i] = q[3i+2]  -> Shift Register I   (b_{3N-1}, b_{3N-4}, ... b_2)
//   group1[i] = q[3i+1]  -> Shift Register II  (b_{3N-2}, ...          b_1)
//   group2[i] = q[3i]    -> Shift Register III (b_{3N-3}, ...          b_0)
// with index N-1 of each group being the first bit that group sends.
//
// Capture on the rising edge and the grouping follow the paper. The
// asynchronous active-low reset to zero is this design's choice.
module input_register
  import ser_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT
) (
  input  logic             loading_clk,
  input  logic             rst_n,
  input  logic [3*N-1:0]   din,
  output logic [N-1:0]     group0,
  output logic [N-1:0]     group1,
  output logic [N-1:0]     group2
);

  logic [3*N-1:0] q;

  always_ff @(posedge loading_clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= din;
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      group0[i] = q[3*i+2];
      group1[i] = q[3*i+1];
      group2[i] = q[3*i];
    end
  end

endmodule

`timescale 1ps / 1fs
// shift_register: one N-bit line of the interleaved serializer (Part II).
//
// On a rising edge of its phase clock the register either loads its N-bit
// group from the input register (load high) or shifts by one position
// towards the output. The output sout is the last flip-flop, so the bit at
// pdata[N-1] leaves first and pdata[0] last. A zero is shifted in behind the
// data; it is never sent, because the next load comes exactly N phase-clock
// cycles later.
//
// Interface and timing
//   clk    Phi<k> (1.6 GHz)
//   load   load_k, sampled on the rising edge
//   pdata  N-bit group, stable while load is sampled
//   sout   sb_k, changes on the rising edge of clk and is held one period
//
// Parallel load at the rising edge of Phi<k> when load_k is valid and the
// N-bit length follow the paper. The zero fill and the asynchronous reset
// are choices of this design.
module shift_register
  import ser_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [N-1:0] pdata,
  output logic         sout
);

  logic [N-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sr <= '0;
    else if (load) sr <= pdata;
    else           sr <= {sr[N-2:0], 1'b0};
  end

  assign sout = sr[N-1];

endmodule

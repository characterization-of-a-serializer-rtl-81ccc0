`timescale 1ps / 1fs
// load_generator: makes the load pulse that tells the shift registers a new
// frame is waiting in the input register.
//
// It detects the falling edge of Loading Clock in the fBITover3 domain with
// two flip-flops: the first keeps the inverted Loading Clock of the previous
// fBITover3 cycle, the second registers "Loading Clock is low now and was
// high one cycle ago". The result is a pulse exactly one fBITover3 period
// wide, once per Loading Clock period.
//
// Interface and timing
//   fbitover3    1.6 GHz clock (copy of Phi<0>); both flip-flops use its
//                falling edge
//   loading_clk  sampled as data; it changes on fBITover3 falling edges, so
//                the pulse starts one fBITover3 period after Loading Clock
//                falls
//   load         high for one fBITover3 period
//
// The paper says the load signal is generated from the falling edge of
// Loading Clock with two flip-flops clocked from fBITover3. The choice of
// the falling fBITover3 edge and the asynchronous reset are this design's.
module load_generator (
  input  logic fbitover3,
  input  logic loading_clk,
  input  logic rst_n,
  output logic load
);

  logic lclk_n_d;   // inverted Loading Clock, one fBITover3 cycle old

  always_ff @(negedge fbitover3 or negedge rst_n) begin
    if (!rst_n) begin
      lclk_n_d <= 1'b1;
      load     <= 1'b0;
    end else begin
      lclk_n_d <= ~loading_clk;
      load     <= ~loading_clk & ~lclk_n_d;
    end
  end

endmodule

`timescale 1ps / 1fs
// serializer_core: the synthesizable part of the 30:1 serializer, everything
// between the PLL clock and the serial bit stream.
//
// A 3N-bit frame is captured by the input register on the rising edge of
// Loading Clock. After Loading Clock falls, load_generator issues a load
// pulse, load_sync turns it into load0/load1/load2, and the three N-bit
// shift registers, each on its own 1.6 GHz phase, take their groups on three
// consecutive phase edges. From then on each line shifts one bit per
// 1.6 GHz period and output_mux interleaves the three lines into sb at the
// full line rate, MSB of the frame first. Every Loading Clock period one
// frame of 3N bits leaves, back to back with the next, so the line carries
// 3N x f_load bits per second (30 x 160 MHz = 4.8 Gbps).
//
// Interface and timing
//   fbit_clk     line-rate clock from the PLL (4.8 GHz nominal)
//   clk_rst_n    resets the clock divider (driven by PLL lock)
//   rst_n        resets the data path
//   din          frame, captured on the rising edge of loading_clk; drive it
//                away from that edge (for example on the falling edge)
//   loading_clk  160 MHz Loading Clock, also the user clock of the source
//   clk40        40 MHz user clock, rising edges aligned with loading_clk
//   sb           serial bit stream
//   Latency: the first bit of a frame occupies sb from
//   T_load/2 + (3 + 1/3) T_fBITover3 to T_load/2 + (3 + 2/3) T_fBITover3
//   after the rising edge of Loading Clock that captured it
//   (5.21 ns to 5.42 ns at 4.8 Gbps). The end of that slot is the paper's
//   internal latency, equation (2).
//
// Structure and clocking follow the paper's block diagram; the exact clock
// edges of the load chain are this design's choices (see load_generator and
// load_sync).
module serializer_core
  import ser_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT
) (
  input  logic           fbit_clk,
  input  logic           clk_rst_n,
  input  logic           rst_n,
  input  logic [3*N-1:0] din,
  output logic           loading_clk,
  output logic           clk40,
  output logic           sb
);

  logic                 fbitover3;
  phase_t               phi;
  logic [N-1:0]         group [N_LINES];
  logic                 load;
  logic                 load_k [N_LINES];
  logic [N_LINES-1:0]   sb_k;

  clock_divider #(.N(N)) u_clock_divider (
    .fbit_clk    (fbit_clk),
    .rst_n       (clk_rst_n),
    .phi         (phi),
    .fbitover3   (fbitover3),
    .loading_clk (loading_clk),
    .clk40       (clk40)
  );

  input_register #(.N(N)) u_input_register (
    .loading_clk (loading_clk),
    .rst_n       (rst_n),
    .din         (din),
    .group0      (group[0]),
    .group1      (group[1]),
    .group2      (group[2])
  );

  load_generator u_load_generator (
    .fbitover3   (fbitover3),
    .loading_clk (loading_clk),
    .rst_n       (rst_n),
    .load        (load)
  );

  load_sync u_load_sync (
    .phi    (phi),
    .rst_n  (rst_n),
    .load   (load),
    .load0  (load_k[0]),
    .load1  (load_k[1]),
    .load2  (load_k[2])
  );

  for (genvar k = 0; k < int'(N_LINES); k++) begin : g_line
    shift_register #(.N(N)) u_shift_register (
      .clk   (phi[k]),
      .rst_n (rst_n),
      .load  (load_k[k]),
      .pdata (group[k]),
      .sout  (sb_k[k])
    );
  end

  output_mux u_output_mux (
    .phi (phi),
    .sb0 (sb_k[0]),
    .sb1 (sb_k[1]),
    .sb2 (sb_k[2]),
    .sb  (sb)
  );

endmodule

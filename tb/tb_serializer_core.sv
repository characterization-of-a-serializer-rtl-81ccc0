`timescale 1ps / 1fs
// tb_serializer_core: runs the synthesizable core from an ideal 4.8 GHz
// line clock. Random 30-bit frames are presented on every falling edge of
// loading_clk. A reference model predicts the line from the serializer's
// rules only: frames leave MSB first and back to back, and the first bit of
// the frame captured at a loading_clk rising edge occupies the 26th
// line-clock period after it (25 full periods pass first), i.e. its slot
// ends T_load/2 + (3 + 2/3) T_fBITover3 after the capturing edge.
// sb is sampled in the middle of every line-clock period. Also checked:
// the line carries 30 bits per loading_clk period (4.8 Gbps from 160 MHz)
// and a data-path reset in mid-stream returns the same latency.
module tb_serializer_core;
  localparam int unsigned NB = 30;

  logic          fbit_clk = 1'b0, clk_rst_n = 1'b0, rst_n = 1'b0;
  logic [NB-1:0] din = '0;
  logic          loading_clk, clk40, sb;

  serializer_core dut (
    .fbit_clk    (fbit_clk),
    .clk_rst_n   (clk_rst_n),
    .rst_n       (rst_n),
    .din         (din),
    .loading_clk (loading_clk),
    .clk40       (clk40),
    .sb          (sb)
  );

  always #104 fbit_clk = ~fbit_clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  always @(negedge loading_clk) din <= NB'($urandom);

  longint unsigned fcnt = 0;
  always @(posedge fbit_clk) fcnt++;

  localparam int unsigned QD = 16;
  logic [NB-1:0]   q_frame [QD];
  longint unsigned q_slot  [QD];
  int unsigned     q_wr = 0, q_rd = 0, n_frames = 0, n_bits = 0;
  bit              model_on = 1'b0;
  longint unsigned last_cap = 0;

  always @(posedge loading_clk) begin
    if (model_on) begin
      if (last_cap != 0) check(fcnt - last_cap == NB, $sformatf("loading period of %0d line periods", fcnt - last_cap));
      last_cap = fcnt;
      q_frame[q_wr % QD] = din;
      q_slot [q_wr % QD] = fcnt - 1 + 64'd25;
      q_wr++;
    end
  end

  always @(negedge fbit_clk) begin
    longint unsigned s;
    int unsigned j;
    s = fcnt - 1;
    if (model_on && q_rd != q_wr && s >= q_slot[q_rd % QD]) begin
      j = int'(s - q_slot[q_rd % QD]);
      check(sb == q_frame[q_rd % QD][NB-1-j],
            $sformatf("frame %0d bit %0d: sb=%b expected %b", q_rd, NB-1-j, sb, q_frame[q_rd % QD][NB-1-j]));
      n_bits++;
      if (j == NB - 1) begin
        q_rd++;
        n_frames++;
      end
    end
  end

  task automatic start_model();
    @(negedge loading_clk);
    #100 rst_n = 1'b1;
    @(negedge loading_clk);
    #100 model_on = 1'b1;
  endtask

  initial begin
    #1000 clk_rst_n = 1'b1;
    repeat (3) @(posedge loading_clk);
    start_model();
    while (n_frames < 50) @(posedge loading_clk);
    // reset in mid-stream
    model_on = 1'b0;
    last_cap = 0;
    #1500 rst_n = 1'b0;
    repeat (2) @(posedge loading_clk);
    q_rd = q_wr;
    start_model();
    while (n_frames < 100) @(posedge loading_clk);
    check(n_bits >= 100 * NB, "too few bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

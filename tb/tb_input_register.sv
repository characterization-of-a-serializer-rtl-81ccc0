`timescale 1ps / 1fs
// tb_input_register: loads random 30-bit frames and checks that the three
// groups hold every third bit from MSB to LSB (group0 = b29, b26, ... b2;
// group1 = b28, ... b1; group2 = b27, ... b0, first-sent bit at index N-1),
// that the register holds its value between Loading Clock rising edges and
// that reset clears it.
module tb_input_register;
  localparam int unsigned N = 10;

  logic           loading_clk = 1'b0;
  logic           rst_n = 1'b1;
  logic [3*N-1:0] din = '0;
  logic [N-1:0]   g0, g1, g2;

  input_register dut (
    .loading_clk (loading_clk),
    .rst_n       (rst_n),
    .din         (din),
    .group0      (g0),
    .group1      (g1),
    .group2      (g2)
  );

  always #3125 loading_clk = ~loading_clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // independent model: walk the frame MSB first and deal bits to the lines
  task automatic check_groups(input logic [3*N-1:0] f);
    logic [N-1:0] e [3];
    int line, pos [3];
    pos = '{N-1, N-1, N-1};
    for (int b = 3*N-1; b >= 0; b--) begin
      line = (3*N-1 - b) % 3;
      e[line][pos[line]] = f[b];
      pos[line]--;
    end
    check(g0 == e[0], $sformatf("group0 %h expected %h", g0, e[0]));
    check(g1 == e[1], $sformatf("group1 %h expected %h", g1, e[1]));
    check(g2 == e[2], $sformatf("group2 %h expected %h", g2, e[2]));
  endtask

  logic [3*N-1:0] frame;
  initial begin
    #10 rst_n = 1'b0;
    #990;
    check(g0 == '0 && g1 == '0 && g2 == '0, "reset value");
    @(negedge loading_clk) rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      @(negedge loading_clk);
      frame = 30'($urandom);
      if (k == 0) frame = 30'h2000_0000;     // single MSB
      if (k == 1) frame = 30'h0000_0001;     // single LSB
      din = frame;
      @(posedge loading_clk);
      #1;
      check_groups(frame);
      din = ~frame;                           // must not pass before the next edge
      #2000;
      check_groups(frame);
    end
    rst_n = 1'b0;
    #10;
    check(g0 == '0 && g1 == '0 && g2 == '0, "reset clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps / 1fs
// tb_shift_register: loads a random 10-bit group every 10 clock cycles and
// checks that sout presents pdata[9], pdata[8], ... pdata[0] on the 10
// cycles after each load, one bit per rising clock edge, and that a load
// overrides shifting.
module tb_shift_register;
  localparam int unsigned N = 10;

  logic         clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [N-1:0] pdata = '0;
  logic         sout;

  shift_register dut (
    .clk   (clk),
    .rst_n (rst_n),
    .load  (load),
    .pdata (pdata),
    .sout  (sout)
  );

  always #312 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  logic [N-1:0] word;
  initial begin
    #1000;
    check(sout == 1'b0, "reset value");
    @(negedge clk) rst_n = 1'b1;
    for (int f = 0; f < 100; f++) begin
      word = N'($urandom);
      if (f == 0) word = 10'b10_0000_0001;
      @(negedge clk);
      pdata = word;
      load  = 1'b1;
      @(negedge clk);
      load  = 1'b0;
      pdata = ~word;                      // must not disturb the shifting
      for (int i = N - 1; i >= 0; i--) begin
        check(sout == word[i], $sformatf("frame %0d bit %0d: sout=%b expected %b", f, i, sout, word[i]));
        if (i > 0) @(negedge clk);
      end
    end
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

`timescale 1ps / 1fs
// tb_load_sync: drives the three phases as a rotating one-hot pattern (one
// line-clock step = 208 ps) and a load pulse one 1.6 GHz period wide that
// starts when Phi<0> falls, once every 30 steps, as load_generator makes it.
// At every rising phase edge it checks the value the shift register of that
// phase would sample: load_k must be seen high at exactly one rising edge
// of Phi<k> per pulse, those edges following each other one step apart
// (Phi<0> 5 steps after load rose, then Phi<1>, then Phi<2>), so the three
// registers load on consecutive phases.
module tb_load_sync;
  import ser_pkg::*;

  phase_t phi   = PHI2;
  logic   rst_n = 1'b0;
  logic   load  = 1'b0;
  logic   load0, load1, load2;

  load_sync dut (
    .phi   (phi),
    .rst_n (rst_n),
    .load  (load),
    .load0 (load0),
    .load1 (load1),
    .load2 (load2)
  );

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  localparam int unsigned EL = 31;     // first load rise step (EL % 3 == 1)
  int unsigned n_hits [3] = '{0, 0, 0};

  initial begin
    logic [2:0] seen;
    int unsigned k;
    bit expected;
    #500 rst_n = 1'b1;
    for (int unsigned e = 1; e < 3000; e++) begin
      #208;
      k = e % 3;                           // phase rising now
      seen = {load2, load1, load0};
      if (e >= EL) begin
        expected = ((e - EL) % 30 == 5 + k);
        check(seen[k] == expected,
              $sformatf("step %0d: load%0d=%b at rising Phi<%0d>, expected %b", e, k, seen[k], k, expected));
        if (seen[k]) n_hits[k]++;
      end
      phi  = phase_t'(1 << k);
      load = (e >= EL) && ((e - EL) % 30 < 3);
    end
    for (int i = 0; i < 3; i++) check(n_hits[i] >= 90, $sformatf("load%0d seen only %0d times", i, n_hits[i]));
    rst_n = 1'b0;
    #1;
    check({load2, load1, load0} == 3'b000, "reset clears");
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

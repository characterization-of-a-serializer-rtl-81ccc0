`timescale 1ps / 1fs
// tb_output_mux: exhaustive test of the phase-selected 3:1 multiplexer:
// Phi<2> high selects sb0, Phi<0> selects sb1, Phi<1> selects sb2, for all
// eight combinations of the three inputs; no phase high gives 0.
module tb_output_mux;
  import ser_pkg::*;

  phase_t phi = '0;
  logic   sb0 = 1'b0, sb1 = 1'b0, sb2 = 1'b0, sb;

  output_mux dut (.phi(phi), .sb0(sb0), .sb1(sb1), .sb2(sb2), .sb(sb));

  int unsigned checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    logic expected;
    for (int p = 0; p < 4; p++) begin
      for (int v = 0; v < 8; v++) begin
        phi = (p == 3) ? phase_t'(0) : phase_t'(1 << p);
        {sb2, sb1, sb0} = 3'(v);
        #10;
        case (p)
          0: expected = sb1;     // Phi<0>
          1: expected = sb2;     // Phi<1>
          2: expected = sb0;     // Phi<2>
          default: expected = 1'b0;
        endcase
        check(sb == expected, $sformatf("phi=%b inputs=%b sb=%b expected %b", phi, v[2:0], sb, expected));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

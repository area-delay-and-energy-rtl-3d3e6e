// tb_ha_csa_bec1_adder -- exhaustive self-checking test of the 4-bit
// HA-CSA-BEC1 adder at its default width: all 512 combinations of a, b and
// cin, {cout, sum} compared with a + b + cin. Counts how often the carry
// ripples through all four mux stages (a ^ b all ones with cin = 1), the
// adder's longest path, and fails if that never happened.
// A time-based watchdog ends the run with a failure if it hangs.
module tb_ha_csa_bec1_adder;
  localparam int W = 4;

  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  int           checks = 0, failures = 0, full_ripple = 0;

  ha_csa_bec1_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    for (int v = 0; v < (1 << (2 * W + 1)); v++) begin
      {cin, a, b} = (2 * W + 1)'(v);
      #1;
      checks++;
      if ({cout, sum} != (W + 1)'(a) + (W + 1)'(b) + (W + 1)'(cin)) begin
        failures++;
        $display("FAIL a=%0d b=%0d cin=%0b got %0d", a, b, cin, {cout, sum});
      end
      if (cin && ((a ^ b) == '1)) full_ripple++;
    end
    checks++;
    if (full_ripple == 0) begin
      failures++;
      $display("FAIL full carry ripple never exercised");
    end
    $display("full-length carry ripples: %0d", full_ripple);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

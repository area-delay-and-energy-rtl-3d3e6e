// tb_cpa -- exhaustive self-checking test of the multiplier's final
// carry-propagate adder: the HA-CSA-BEC1 adder at 6 bits with carry in 0.
// All 4096 operand pairs, {cout, sum} compared with a + b; counts carries
// out of the top bit.
// A time-based watchdog ends the run with a failure if it hangs.
module tb_cpa;
  localparam int W = 6;

  logic [W-1:0] a, b, sum;
  logic         cout;
  int           checks = 0, failures = 0, overflows = 0;

  ha_csa_bec1_adder #(.WIDTH(W)) dut (
    .a(a), .b(b), .cin(1'b0), .sum(sum), .cout(cout)
  );

  initial begin
    for (int v = 0; v < (1 << (2 * W)); v++) begin
      {a, b} = (2 * W)'(v);
      #1;
      checks++;
      if ({cout, sum} != (W + 1)'(a) + (W + 1)'(b)) begin
        failures++;
        $display("FAIL a=%0d b=%0d got %0d", a, b, {cout, sum});
      end
      if (cout) overflows++;
    end
    checks++;
    if (overflows == 0) begin
      failures++;
      $display("FAIL carry out never produced");
    end
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

// tb_half_adder -- exhaustive self-checking test of half_adder.
// Applies all four input pairs and compares {c, s} with a + b.
// A time-based watchdog ends the run with a failure if it hangs.
module tb_half_adder;
  import dadda_pkg::*;

  logic a, b;
  cs_t  y;
  int   checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .y(y));

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if (2'(y) != 2'(a) + 2'(b)) begin
        failures++;
        $display("FAIL a=%0b b=%0b got c=%0b s=%0b", a, b, y.c, y.s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

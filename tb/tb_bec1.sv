// tb_bec1 -- exhaustive self-checking test of bec1.
// For every 2-bit input checks y == x + 1 (mod 4); the three inputs a half
// adder can produce are the ones that matter, {1,1} wraps to {0,0}.
// A time-based watchdog ends the run with a failure if it hangs.
module tb_bec1;
  import dadda_pkg::*;

  cs_t x, y;
  int  checks = 0, failures = 0;

  bec1 dut (.x(x), .y(y));

  initial begin
    for (int v = 0; v < 4; v++) begin
      x = cs_t'(v);
      #1;
      checks++;
      if (2'(y) != 2'(v + 1)) begin
        failures++;
        $display("FAIL x=%0d got %0d", v, 2'(y));
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

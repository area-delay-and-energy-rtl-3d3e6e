// tb_mux2 -- exhaustive self-checking test of mux2 (y = sel ? in1 : in0).
// A time-based watchdog ends the run with a failure if it hangs.
module tb_mux2;
  logic in0, in1, sel, y;
  int   checks = 0, failures = 0;

  mux2 dut (.in0(in0), .in1(in1), .sel(sel), .y(y));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {sel, in1, in0} = 3'(v);
      #1;
      checks++;
      if (y != (sel ? in1 : in0)) begin
        failures++;
        $display("FAIL sel=%0b in1=%0b in0=%0b got %0b", sel, in1, in0, y);
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

// tb_pp_generator -- exhaustive self-checking test of the 4 x 4
// partial-product generator: for all 256 operand pairs, every one of the 16
// bits pp[j][i] is compared with a[i] & b[j], and the weighted sum of all
// partial products with a * b.
// A time-based watchdog ends the run with a failure if it hangs.
module tb_pp_generator;
  localparam int W = 4;

  logic [W-1:0]        a, b;
  logic [W-1:0][W-1:0] pp;
  int                  checks = 0, failures = 0, total;

  pp_generator dut (.a(a), .b(b), .pp(pp));

  initial begin
    for (int v = 0; v < (1 << (2 * W)); v++) begin
      {a, b} = (2 * W)'(v);
      #1;
      total = 0;
      for (int j = 0; j < W; j++) begin
        for (int i = 0; i < W; i++) begin
          checks++;
          if (pp[j][i] != (a[i] & b[j])) begin
            failures++;
            $display("FAIL a=%0d b=%0d pp[%0d][%0d]", a, b, j, i);
          end
          total += int'(pp[j][i]) << (i + j);
        end
      end
      checks++;
      if (total != int'(a) * int'(b)) begin
        failures++;
        $display("FAIL a=%0d b=%0d weighted sum %0d", a, b, total);
      end
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

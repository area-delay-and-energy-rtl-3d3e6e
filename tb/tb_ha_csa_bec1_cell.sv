// tb_ha_csa_bec1_cell -- exhaustive self-checking test of the one-bit
// HA-CSA-BEC1 cell. For all eight (a, b, cin) it checks {cout, sum} against
// a + b + cin, and also against the cell's defining equations: for cin = 0
// sum = a^b, cout = a&b; for cin = 1 sum = ~(a^b), cout = (a&b)^(a^b).
// A time-based watchdog ends the run with a failure if it hangs.
module tb_ha_csa_bec1_cell;
  logic a, b, cin, sum, cout;
  logic exp_s, exp_c;
  int   checks = 0, failures = 0;

  ha_csa_bec1_cell dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    for (int v = 0; v < 8; v++) begin
      {cin, a, b} = 3'(v);
      #1;
      checks++;
      if ({cout, sum} != 2'(a) + 2'(b) + 2'(cin)) begin
        failures++;
        $display("FAIL a=%0b b=%0b cin=%0b got %0b%0b", a, b, cin, cout, sum);
      end
      exp_s = cin ? ~(a ^ b) : (a ^ b);
      exp_c = cin ? ((a & b) ^ (a ^ b)) : (a & b);
      checks++;
      if (sum != exp_s || cout != exp_c) begin
        failures++;
        $display("FAIL equations a=%0b b=%0b cin=%0b", a, b, cin);
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

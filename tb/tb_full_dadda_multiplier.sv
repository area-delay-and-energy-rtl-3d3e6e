// tb_full_dadda_multiplier -- end-to-end self-checking test of the 4 x 4
// full-Dadda multiplier at its default (and only) size.
// All 256 operand pairs are applied. For each it checks:
//   - the product p against a * b;
//   - that the reduction tree has already brought the 16 partial products
//     down to two 6-bit rows whose weighted sum plus A0B0 equals a * b.
// It counts how often each HA-CSA-BEC1 cell took its carry-in = 0 path (half
// adder result) and its carry-in = 1 path (excess-1 result), how often the
// late carry C3 reached the last cell as a 1, and how often the final adder
// produced a carry out (p[7]); a mechanism that never happened is a failure.
// It also checks the component-count rules of dadda_pkg for M = 4 against the
// cells instantiated here (3 cells, 3 half adders, 16 ANDs, 6 muxes, 6-bit
// final adder). A time-based watchdog ends the run with a failure.
module tb_full_dadda_multiplier;
  import dadda_pkg::*;

  localparam int W = MULT_WIDTH;

  logic [W-1:0]   a, b;
  logic [2*W-1:0] p;
  int             checks = 0, failures = 0;
  int             cin0 [3];
  int             cin1 [3];
  int             late_carry = 0, cpa_carry = 0;
  logic [2:0]     cin_now;

  full_dadda_multiplier dut (.a(a), .b(b), .p(p));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (a=%0d b=%0d)", what, a, b);
    end
  endtask

  initial begin
    foreach (cin0[k]) begin
      cin0[k] = 0;
      cin1[k] = 0;
    end

    check(n_cells(W) == 3,        "cell count rule");
    check(n_half_adders(W) == 3,  "half adder count rule");
    check(n_and_gates(W) == 16,   "AND gate count rule");
    check(n_muxes(W) == 6,        "mux count rule");
    check(cpa_width(W) == 6,      "final adder width rule");
    check($bits(dut.row_x) == cpa_width(W), "final adder row width");

    for (int v = 0; v < (1 << (2 * W)); v++) begin
      {a, b} = (2 * W)'(v);
      #1;
      check(p == (2 * W)'(a) * (2 * W)'(b), "product");
      check(((int'(dut.row_x) + int'(dut.row_y)) << 1) + int'(dut.pp[0][0])
              == int'(a) * int'(b), "two-row reduction result");

      cin_now = {dut.cell_s5.cin, dut.cell_s3.cin, dut.cell_s1.cin};
      for (int k = 0; k < 3; k++) begin
        if (cin_now[k]) cin1[k]++;
        else            cin0[k]++;
      end
      if (dut.c3) late_carry++;
      if (p[2*W-1]) cpa_carry++;
    end

    for (int k = 0; k < 3; k++) begin
      $display("cell %0d: carry-in 0 path %0d times, carry-in 1 path %0d times",
               k, cin0[k], cin1[k]);
      check(cin0[k] > 0, "cell carry-in 0 path used");
      check(cin1[k] > 0, "cell carry-in 1 (excess-1) path used");
    end
    $display("late carry C3 = 1: %0d times; final adder carry out: %0d times",
             late_carry, cpa_carry);
    check(late_carry > 0, "late carry into last cell");
    check(cpa_carry > 0,  "final adder carry out");

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

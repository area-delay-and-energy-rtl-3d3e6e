// bec1 -- two-bit binary to excess-1 converter.
//
// Adds one to the 2-bit {carry, sum} result of a half adder, so that the cell
// has the "carry in = 1" result ready before the real carry arrives. Because
// a half adder never outputs {1,1}, the increment never overflows:
//   s1 = NOT s,   c1 = c XOR s.
// These are the inverter and XOR gate of step 2 of the cell drawing, and the
// carry-out equation (A AND B) XOR (A XOR B) given for carry in = 1.
// Ports: x = {c, s} in; y = x + 1 out. Purely combinational.
module bec1
  import dadda_pkg::*;
(
  input  cs_t x,
  output cs_t y
);

  always_comb begin
    y.s = ~x.s;
    y.c = x.c ^ x.s;
  end

endmodule

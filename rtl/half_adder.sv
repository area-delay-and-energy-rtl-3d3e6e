// half_adder -- one-bit half adder.
//
// Adds two bits with no carry in: sum = a XOR b, carry = a AND b. It is the
// first stage of the HA-CSA-BEC1 cell and also stands alone as the 2:2
// compressor of the reduction tree. The gate equations are the textbook
// half adder, which the design names but does not draw in more detail.
// Ports: a, b in; y = {c, s} out. Purely combinational.
module half_adder
  import dadda_pkg::*;
(
  input  logic a,
  input  logic b,
  output cs_t  y
);

  always_comb begin
    y.s = a ^ b;
    y.c = a & b;
  end

endmodule

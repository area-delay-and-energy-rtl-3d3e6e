// ha_csa_bec1_cell -- one-bit half-adder based carry-select adder with
// binary to excess-1 converter (HA-CSA-BEC1), used as the full adder (3:2
// compressor) of the multiplier.
//
// Three steps, as in the design:
//   1. a half adder forms {c, s} = a + b, the result for carry in = 0;
//   2. a 2-bit excess-1 converter forms {c, s} + 1, the result for carry in = 1;
//   3. two 2:1 muxes, both selected by cin, pick sum and cout.
// So for cin = 0: sum = a ^ b, cout = a & b; for cin = 1: sum = ~(a ^ b),
// cout = (a & b) ^ (a ^ b) = a | b. The result equals a + b + cin.
// cin only passes through the mux stage, so a late carry in costs one mux
// delay; a and b go through steps 1 and 2. Assigning the early-arriving
// signals to a and b and the late one to cin is the whole point of the cell.
// Ports: a, b, cin in; sum, cout out. Purely combinational.
module ha_csa_bec1_cell
  import dadda_pkg::*;
(
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  cs_t r0;  // result assuming cin = 0
  cs_t r1;  // result assuming cin = 1

  half_adder u_ha  (.a(a), .b(b), .y(r0));
  bec1       u_bec (.x(r0), .y(r1));

  mux2 u_mux_sum  (.in0(r0.s), .in1(r1.s), .sel(cin), .y(sum));
  mux2 u_mux_cout (.in0(r0.c), .in1(r1.c), .sel(cin), .y(cout));

endmodule

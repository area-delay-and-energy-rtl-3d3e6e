// ha_csa_bec1_adder -- WIDTH-bit HA-CSA-BEC1 adder (carry-select adder with
// half adders and per-bit excess-1 converters).
//
// Every bit has its own half adder and 2-bit excess-1 converter, with no
// connection between neighbouring bits: all of them work in parallel on a and
// b. The carry then ripples only through the mux stage: the cout mux of bit i
// drives the select line of both muxes of bit i+1. Bit 0 is selected by cin.
// This is a chain of ha_csa_bec1_cell instances. The 4-bit default is the size
// the adder is presented and transistor-counted at (4 HAs, 8 two-bit
// converters, 8 muxes).
// The same adder, at WIDTH = 6 and cin = 0, is used as the multiplier's final
// carry-propagate adder; that choice is this implementation's (see README).
// Ports: a, b [WIDTH-1:0], cin in; sum [WIDTH-1:0], cout out.
// Purely combinational; the critical path is one mux per bit.
module ha_csa_bec1_adder #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  logic [WIDTH:0] carry;  // carry[i] selects bit i

  assign carry[0] = cin;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    ha_csa_bec1_cell u_cell (
      .a   (a[i]),
      .b   (b[i]),
      .cin (carry[i]),
      .sum (sum[i]),
      .cout(carry[i+1])
    );
  end

  assign cout = carry[WIDTH];

endmodule

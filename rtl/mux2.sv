// mux2 -- 2:1 multiplexer.
//
// y = in1 when sel is 1, else in0. In the original circuit this is a
// two-transistor pass-transistor mux (one NMOS, one PMOS sharing the select
// line); here it is ordinary logic with the same truth table, so the
// weak-level behaviour of pass transistors is not modelled.
// Ports: in0, in1, sel in; y out. Purely combinational.
module mux2 (
  input  logic in0,
  input  logic in1,
  input  logic sel,
  output logic y
);

  always_comb y = sel ? in1 : in0;

endmodule

// full_dadda_multiplier -- 4 x 4 unsigned multiplier: full-Dadda reduction
// tree built from HA-CSA-BEC1 cells, with a 6-bit final adder.
//
// Structure (weights in brackets, AiBj = a[i] & b[j]):
//   partial products  16 AND gates (pp_generator).
//   stage 1 (4 -> 3)  two HA-CSA-BEC1 cells on the two tallest columns:
//                     cell_s1: A2B1 + A1B2 + A0B3  -> S1 [3], C1 [4]
//                     cell_s3: A3B1 + A2B2 + A1B3  -> S3 [4], C3 [5]
//   stage 2 (3 -> 2)  three half adders and one HA-CSA-BEC1 cell:
//                     ha_s0  : A1B1 + A0B2         -> S0 [2], C0 [3]
//                     ha_s2  : S1 + C0             -> S2 [3], C2 [4]
//                     ha_s4  : S3 + C1             -> S4 [4], C4 [5]
//                     cell_s5: A3B2 + A2B3 + C3    -> S5 [5], C5 [6]
//   final adder       two 6-bit rows of weights 1..6
//                     row x = {A3B3, S5, S4, S2, A2B0, A1B0}
//                     row y = {C5,   C4, C2, A3B0, S0, A0B1}
//                     p[7:1] = x + y, p[0] = A0B0.
// That is (M-1)(M-3) = 3 cells, M-1 = 3 half adders, M^2 = 16 AND gates,
// 6 muxes and a 2(M-1) = 6-bit final adder for M = 4.
// The connections follow the published block diagram of the 4-bit design.
// Choices made here: in cell_s5 the late carry C3 drives the cell's carry
// input (as the design intends: early AND-gate outputs on a/b, the late
// signal on cin); in the two first-stage cells all three inputs arrive
// together and the third partial product is put on cin. A3B0 goes straight
// to the final adder at weight 3 (the diagram leaves this wire out; it is the
// only place left for it). The final adder is the HA-CSA-BEC1 adder at
// 6 bits with carry in 0; the design only calls it an improved ripple-carry
// adder without giving its insides.
// The operand width is fixed at 4: the tree above is wired by hand for that
// size. Ports: a, b [3:0] in; p [7:0] = a * b out. Purely combinational: the
// product is valid one combinational settling time after the operands.
module full_dadda_multiplier
  import dadda_pkg::*;
(
  input  logic [MULT_WIDTH-1:0]   a,
  input  logic [MULT_WIDTH-1:0]   b,
  output logic [2*MULT_WIDTH-1:0] p
);

  localparam int unsigned CPA_W = cpa_width(MULT_WIDTH);

  // ---------------------------------------------------------------- partial products
  logic [MULT_WIDTH-1:0][MULT_WIDTH-1:0] pp;  // pp[j][i] = AiBj

  pp_generator #(.WIDTH(MULT_WIDTH)) u_pp (.a(a), .b(b), .pp(pp));

  // ---------------------------------------------------------------- stage 1
  logic s1, c1, s3, c3;

  ha_csa_bec1_cell cell_s1 (
    .a(pp[1][2]), .b(pp[2][1]), .cin(pp[3][0]),  // A2B1, A1B2, A0B3
    .sum(s1), .cout(c1)
  );

  ha_csa_bec1_cell cell_s3 (
    .a(pp[1][3]), .b(pp[2][2]), .cin(pp[3][1]),  // A3B1, A2B2, A1B3
    .sum(s3), .cout(c3)
  );

  // ---------------------------------------------------------------- stage 2
  cs_t  h0, h2, h4;
  logic s5, c5;

  half_adder ha_s0 (.a(pp[1][1]), .b(pp[2][0]), .y(h0));  // A1B1, A0B2
  half_adder ha_s2 (.a(s1),       .b(h0.c),     .y(h2));  // S1, C0
  half_adder ha_s4 (.a(s3),       .b(c1),       .y(h4));  // S3, C1

  ha_csa_bec1_cell cell_s5 (
    .a(pp[2][3]), .b(pp[3][2]), .cin(c3),        // A3B2, A2B3, C3
    .sum(s5), .cout(c5)
  );

  // ---------------------------------------------------------------- final adder
  logic [CPA_W-1:0] row_x, row_y, cpa_sum;
  logic             cpa_cout;

  assign row_x = {pp[3][3], s5,   h4.s, h2.s,     pp[0][2], pp[0][1]};
  assign row_y = {c5,       h4.c, h2.c, pp[0][3], h0.s,     pp[1][0]};

  ha_csa_bec1_adder #(.WIDTH(CPA_W)) u_cpa (
    .a   (row_x),
    .b   (row_y),
    .cin (1'b0),
    .sum (cpa_sum),
    .cout(cpa_cout)
  );

  assign p = {cpa_cout, cpa_sum, pp[0][0]};

endmodule

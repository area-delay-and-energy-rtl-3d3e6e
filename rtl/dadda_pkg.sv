// dadda_pkg -- shared types and sizing rules of the full-Dadda multiplier.
//
// Holds the operand width of the multiplier (4 bits, the size the design is
// built and characterised at), a packed {carry, sum} pair used by the
// half-adder and excess-1 stages of the adder cell, and the closed-form
// component counts of an M-bit full-Dadda multiplier built from
// HA-CSA-BEC1 cells. The counts for cells, half adders, AND gates and 2:1
// muxes follow the published equations. The carry-propagate adder width is
// taken as 2*(M-1): that matches the 6-bit final adder of the 4-bit design and
// the 10-bit final adder of the 6-bit reduction pattern, whereas the printed
// formula 2*(M-2) would give 4 and 8 (treated here as a misprint).
// Nothing here is clocked; there is no timing.
package dadda_pkg;

  // Operand width of the multiplier.
  localparam int unsigned MULT_WIDTH = 4;

  // Two-bit result of a half adder or of the excess-1 converter.
  typedef struct packed {
    logic c;  // carry (weight 2)
    logic s;  // sum   (weight 1)
  } cs_t;

  // Number of HA-CSA-BEC1 cells (3:2 compressors), valid for m > 2.
  function automatic int unsigned n_cells(int unsigned m);
    return (m - 1) * (m - 3);
  endfunction

  // Number of plain half adders in the reduction tree.
  function automatic int unsigned n_half_adders(int unsigned m);
    return m - 1;
  endfunction

  // Number of AND gates in the partial-product generator.
  function automatic int unsigned n_and_gates(int unsigned m);
    return m * m;
  endfunction

  // Width of the final carry-propagate adder.
  function automatic int unsigned cpa_width(int unsigned m);
    return 2 * (m - 1);
  endfunction

  // Number of 2:1 multiplexers (two per HA-CSA-BEC1 cell).
  function automatic int unsigned n_muxes(int unsigned m);
    return 2 * (m - 1) * (m - 3);
  endfunction

endpackage

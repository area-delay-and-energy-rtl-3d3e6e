// pp_generator -- partial-product generator of a WIDTH x WIDTH multiplier.
//
// WIDTH*WIDTH AND gates: pp[j][i] = a[i] & b[j], the bit of weight i + j.
// Row j is a shifted copy of a gated by b[j]. For the 4-bit design that is
// the 16 AND gates feeding the reduction tree.
// Ports: a, b [WIDTH-1:0] in; pp [WIDTH-1:0][WIDTH-1:0] out, indexed [j][i].
// Purely combinational.
module pp_generator #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0]            a,
  input  logic [WIDTH-1:0]            b,
  output logic [WIDTH-1:0][WIDTH-1:0] pp
);

  always_comb begin
    for (int j = 0; j < WIDTH; j++) begin
      for (int i = 0; i < WIDTH; i++) begin
        pp[j][i] = a[i] & b[j];
      end
    end
  end

endmodule

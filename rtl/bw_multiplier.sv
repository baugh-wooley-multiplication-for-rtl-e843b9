// bw_multiplier: one N x N -> 2N multiplier for signed, unsigned and mixed
// operands, built from the merged Baugh-Wooley partial products and a single
// shared summation tree.
//
// Modes: s = 1 both operands two's complement; m = 1 multiplier a unsigned and
// multiplicand b two's complement; s = m = 0 both unsigned. Only the partial
// product generator sees the mode; the adder tree is the same for all three,
// which is the point of the merged scheme. The full 2N-bit product is exact
// in every mode.
//
// Interface: a, b, s, m in; p out. Purely combinational; its depth is one
// AND/XOR level plus log2(N) adder levels.
module bw_multiplier #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           s,
  input  logic           m,
  output logic [2*N-1:0] p
);

  logic [2*N-1:0] pp [N];

  bw_pp_gen #(.N(N)) u_pp_gen (
    .a  (a),
    .b  (b),
    .s  (s),
    .m  (m),
    .pp (pp)
  );

  pp_adder_tree #(.ROWS(N), .W(2*N)) u_tree (
    .rows (pp),
    .sum  (p)
  );

endmodule

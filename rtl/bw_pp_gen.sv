// bw_pp_gen: merged Baugh-Wooley partial-product generator for signed,
// unsigned and mixed N x N multiplication.
//
// Row i is the multiplicand b ANDed with multiplier bit a_i and shifted left
// by i, as in long multiplication. Two mode inputs change a handful of bits so
// that one shared summation network yields the right 2N-bit product:
//   s = signed x signed (Baugh-Wooley), m = unsigned a x signed b,
//   s = m = 0 unsigned. s and m must not both be 1.
// First row (i = 0):
//   bit N     = s | (m & ~(a0 b[N-1]))
//   bit N-1   = s ^ (a0 b[N-1])
//   bits N-2..0 = a0 b[N-2..0]
// Intermediate rows (0 < i < N-1):
//   bit N-1+i = (s | m) ^ (a_i b[N-1]),  bits N-2+i..i = a_i b[N-2..0]
// Last row (i = N-1):
//   bit 2N-1  = s | m
//   bit 2N-2  = m ^ (a[N-1] b[N-1])
//   bit N-1+j = s ^ (a[N-1] b[j]) for j = 0..N-2
// The inverted sign-column bits stand for the two's complement of the
// negative terms of the signed product; the constant ones at 2N-1 and N (the
// "+1" of the complement, folded into spare positions) complete it. In mixed
// mode the "+1" at N-1 is absorbed by writing a0 b[N-1] at N-1 and its
// inverse at N. These equations are the paper's; placing bit j of the last
// row at N-1+j follows its shift rule for all rows.
//
// Interface: a (multiplier), b (multiplicand), s, m in; pp[N] rows of 2N
// bits out. Every row is given at its final weight, so positions outside a
// row are constant 0 (about half of all output bits); this keeps the adder
// tree generic and synthesis removes the constants. Purely combinational.
module bw_pp_gen #(
  parameter int unsigned N = 32
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           s,
  input  logic           m,
  output logic [2*N-1:0] pp [N]
);

  always_comb begin
    for (int i = 0; i < N; i++) begin
      pp[i] = '0;
      // plain AND-array bits a_i b_j for j = 0..N-2
      for (int j = 0; j < N - 1; j++) begin
        pp[i][i+j] = a[i] & b[j];
      end
      if (i == 0) begin
        pp[i][N-1] = s ^ (a[0] & b[N-1]);
        pp[i][N]   = s | (m & ~(a[0] & b[N-1]));
      end else if (i < N - 1) begin
        pp[i][N-1+i] = (s | m) ^ (a[i] & b[N-1]);
      end else begin
        for (int j = 0; j < N - 1; j++) begin
          pp[i][N-1+j] = s ^ (a[N-1] & b[j]);
        end
        pp[i][2*N-2] = m ^ (a[N-1] & b[N-1]);
        pp[i][2*N-1] = s | m;
      end
    end
  end

endmodule

// pp_adder_tree: sums ROWS operands of W bits modulo 2^W with a balanced
// binary tree of adders.
//
// The operands are placed at the leaves of a complete binary tree with
// LEAVES = 2^ceil(log2(ROWS)) leaves (missing leaves read 0). Every inner
// node k adds its children 2k and 2k+1, so the sum is reached after
// ceil(log2(ROWS)) adder levels and all adders of one level work in parallel.
// The paper leaves the summation scheme open and names a simple binary adder
// tree as one option; that option is what is built here.
//
// Interface: rows[ROWS] in, sum out. Purely combinational.
module pp_adder_tree #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned W    = 64
) (
  input  logic [W-1:0] rows [ROWS],
  output logic [W-1:0] sum
);

  localparam int unsigned LEVELS = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned LEAVES = 1 << LEVELS;

  // node[1] is the root; node[LEAVES + r] holds operand r
  logic [W-1:0] node [1:2*LEAVES-1];

  always_comb begin
    for (int unsigned r = 0; r < LEAVES; r++) begin
      node[LEAVES+r] = (r < ROWS) ? rows[r] : '0;
    end
    for (int unsigned k = LEAVES - 1; k >= 1; k--) begin
      node[k] = node[2*k] + node[2*k+1];
    end
  end

  assign sum = node[1];

endmodule

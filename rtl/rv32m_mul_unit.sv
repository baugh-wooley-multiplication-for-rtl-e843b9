// rv32m_mul_unit: RV32M multiply unit that executes mul, mulh, mulhsu and
// mulhu on one shared merged Baugh-Wooley multiplier.
//
// The instruction's funct3 is decoded into the mode signals s/u/m and an
// upper/lower word select. rs1 is the multiplicand b and rs2 the multiplier a,
// so that for mulhsu the signed operand rs1 is the multiplicand and the
// unsigned rs2 the multiplier, as the mixed scheme requires. The 2*XLEN-bit
// product's lower word is written for mul, the upper word for the others.
//
// Timing (this design's choice, not from the paper): the whole multiply is
// combinational and the result is registered once, so rd and out_valid appear
// on the clock edge after in_valid; a new instruction can be accepted every
// cycle and there is no stall. A funct3 with bit 2 set (divide/remainder) is
// not executed: it returns rd = 0 with illegal = 1. rst_n is synchronous and
// active low and clears out_valid and illegal.
//
// Interface: clk, rst_n, in_valid, funct3, rs1, rs2 in; out_valid, rd,
// illegal out.
module rv32m_mul_unit
  import bw_mul_pkg::*;
#(
  parameter int unsigned XLEN_P = XLEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [2:0]        funct3,
  input  logic [XLEN_P-1:0] rs1,
  input  logic [XLEN_P-1:0] rs2,
  output logic              out_valid,
  output logic [XLEN_P-1:0] rd,
  output logic              illegal
);

  bw_mode_t            mode;
  logic                upper;
  logic                is_mul;
  logic [2*XLEN_P-1:0] product;
  logic [XLEN_P-1:0]   result;

  mul_decoder u_dec (
    .funct3 (funct3),
    .mode   (mode),
    .upper  (upper),
    .is_mul (is_mul)
  );

  bw_multiplier #(.N(XLEN_P)) u_mul (
    .a (rs2),
    .b (rs1),
    .s (mode.s),
    .m (mode.m),
    .p (product)
  );

  always_comb begin
    if (!is_mul)    result = '0;
    else if (upper) result = product[2*XLEN_P-1:XLEN_P];
    else            result = product[XLEN_P-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      illegal   <= 1'b0;
      rd        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        rd      <= result;
        illegal <= !is_mul;
      end
    end
  end

  // one-hot mode for every multiply
  always_comb begin
    if (in_valid && is_mul) assert ($onehot(mode));
  end

endmodule

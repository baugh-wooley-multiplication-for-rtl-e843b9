// bw_mul_pkg: types and constants shared by the merged Baugh-Wooley multiplier.
//
// XLEN is the RV32 register width. mul_funct3_e lists the funct3 encodings
// of the four RV32M multiply instructions (funct7 = 0000001, opcode OP), as
// fixed by the RISC-V M extension. bw_mode_t carries the three demultiplexed
// mode signals of the merged multiplier: s (signed x signed), u (unsigned x
// unsigned) and m (mixed: unsigned multiplier, signed multiplicand). Exactly
// one of them is set for a multiply; the multiplier itself only reads s and m,
// since unsigned operation is the case where both are 0.
package bw_mul_pkg;

  parameter int unsigned XLEN = 32;

  typedef enum logic [2:0] {
    F3_MUL    = 3'b000,
    F3_MULH   = 3'b001,
    F3_MULHSU = 3'b010,
    F3_MULHU  = 3'b011
  } mul_funct3_e;

  typedef struct packed {
    logic s;  // signed    (mulh)
    logic u;  // unsigned  (mulhu, and mul)
    logic m;  // mixed     (mulhsu)
  } bw_mode_t;

endpackage

// mul_decoder: demultiplexes an RV32M multiply instruction into the mode
// signals of the merged Baugh-Wooley multiplier.
//
// Function: mulh -> s, mulhu -> u, mulhsu -> m, the one-hot mapping of the
// paper's instruction table. mul, which keeps only the lower word of the
// product, is mapped to u: the lower XLEN bits are the same in every mode, so
// the choice is free (this design's own choice). `upper` selects the upper
// product word for the three mulh* instructions. funct3 values with bit 2 set
// are divide/remainder encodings; they give is_mul = 0 and no mode bit.
//
// Interface: funct3 in; mode, upper, is_mul out. Purely combinational.
module mul_decoder
  import bw_mul_pkg::*;
(
  input  logic [2:0] funct3,
  output bw_mode_t   mode,
  output logic       upper,
  output logic       is_mul
);

  always_comb begin
    mode   = '0;
    upper  = 1'b0;
    is_mul = 1'b1;
    unique case (funct3)
      F3_MUL:    begin mode.u = 1'b1; upper = 1'b0; end
      F3_MULH:   begin mode.s = 1'b1; upper = 1'b1; end
      F3_MULHSU: begin mode.m = 1'b1; upper = 1'b1; end
      F3_MULHU:  begin mode.u = 1'b1; upper = 1'b1; end
      default:   is_mul = 1'b0;
    endcase
  end

endmodule

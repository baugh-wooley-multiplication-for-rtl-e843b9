// mul_decoder_tb: self-checking testbench for mul_decoder.
//
// Applies all eight funct3 values and compares mode (s, u, m), upper and
// is_mul with a table written out here from the RV32M encodings: mul -> u,
// lower word; mulh -> s; mulhsu -> m; mulhu -> u, each upper word; funct3
// with bit 2 set -> not a multiply, no mode bit.
module mul_decoder_tb;
  import bw_mul_pkg::*;

  logic [2:0] funct3;
  bw_mode_t   mode;
  logic       upper, is_mul;
  int checks = 0, failures = 0;

  mul_decoder dut (.funct3(funct3), .mode(mode), .upper(upper), .is_mul(is_mul));

  // expected {s,u,m,upper,is_mul} indexed by funct3
  logic [4:0] expected [8] = '{
    5'b01001,  // 000 mul
    5'b10011,  // 001 mulh
    5'b00111,  // 010 mulhsu
    5'b01011,  // 011 mulhu
    5'b00000, 5'b00000, 5'b00000, 5'b00000
  };

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 8; f++) begin
      funct3 = 3'(f);
      #1;
      checks++;
      if ({mode.s, mode.u, mode.m, upper, is_mul} !== expected[f]) begin
        failures++;
        $display("FAIL funct3=%03b got s=%b u=%b m=%b upper=%b is_mul=%b", funct3,
                 mode.s, mode.u, mode.m, upper, is_mul);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

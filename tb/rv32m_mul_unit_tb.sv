// rv32m_mul_unit_tb: end-to-end testbench for the RV32M multiply unit at its
// default size (XLEN = 32).
//
// A stream of mul, mulh, mulhsu, mulhu and, now and then, a divide encoding
// is sent with random operands (a third of them corner values) and random
// gaps between instructions. Each expected rd is worked out here from the
// RISC-V definitions: mul = low word of rs1*rs2; mulh = high word, both
// signed; mulhsu = high word, rs1 signed and rs2 unsigned; mulhu = high
// word, both unsigned; a divide encoding gives illegal = 1 and rd = 0. The
// result must arrive exactly one clock after the instruction. Each mode (s,
// u, m), the lower-word select, back-to-back issue, a gap and the illegal path
// are counted; one that never happened counts as a failure.
module rv32m_mul_unit_tb;
  import bw_mul_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        in_valid;
  logic [2:0]  funct3;
  logic [31:0] rs1, rs2;
  logic        out_valid;
  logic [31:0] rd;
  logic        illegal;
  int checks = 0, failures = 0;
  int n_mul = 0, n_mulh = 0, n_mulhsu = 0, n_mulhu = 0, n_illegal = 0, n_b2b = 0, n_gap = 0;

  rv32m_mul_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_rd(input logic [2:0] f, input logic [31:0] x,
                                         input logic [31:0] y);
    logic signed [65:0] xs, ys, xu, yu;
    logic [65:0] pr;
    xs = 66'($signed(x));
    ys = 66'($signed(y));
    xu = {34'd0, x};
    yu = {34'd0, y};
    case (f)
      3'b000: pr = 66'(xu * yu);
      3'b001: pr = 66'(xs * ys);
      3'b010: pr = 66'(xs * yu);
      3'b011: pr = 66'(xu * yu);
      default: return '0;
    endcase
    return (f == 3'b000) ? pr[31:0] : pr[63:32];
  endfunction

  function automatic logic [31:0] operand();
    logic [31:0] c [6] = '{32'h0, 32'h1, 32'hffffffff, 32'h80000000, 32'h7fffffff, 32'h80000001};
    if ($urandom_range(2) == 0) return c[$urandom_range(5)];
    return $urandom;
  endfunction

  // Checker and scoreboard. At each rising edge the outputs still show the
  // result of the instruction sampled at the previous edge; compare them,
  // then record what the instruction sampled at this edge must produce.
  logic        exp_valid = 1'b0;
  logic [31:0] exp_rd = '0;
  logic        exp_ill = 1'b0;
  logic        prev_valid = 1'b0;

  always @(posedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== exp_valid) begin
        failures++;
        $display("FAIL out_valid=%b expected %b at %0t", out_valid, exp_valid, $time);
      end else if (exp_valid && (rd !== exp_rd || illegal !== exp_ill)) begin
        failures++;
        $display("FAIL rd=%h illegal=%b expected rd=%h illegal=%b at %0t", rd, illegal,
                 exp_rd, exp_ill, $time);
      end
      exp_valid = in_valid;
      if (in_valid) begin
        exp_rd  = ref_rd(funct3, rs1, rs2);
        exp_ill = funct3[2];
        case (funct3)
          3'b000: n_mul++;
          3'b001: n_mulh++;
          3'b010: n_mulhsu++;
          3'b011: n_mulhu++;
          default: n_illegal++;
        endcase
        if (prev_valid) n_b2b++;
      end else if (prev_valid) n_gap++;
      prev_valid = in_valid;
    end
  end

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    funct3 = '0;
    rs1 = '0;
    rs2 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      in_valid = ($urandom_range(3) != 0);
      funct3 = ($urandom_range(15) == 0) ? 3'($urandom_range(4, 7)) : 3'($urandom_range(3));
      rs1 = operand();
      rs2 = operand();
      @(posedge clk);
      #1;  // drive just after the edge
    end
    in_valid = 1'b0;
    repeat (2) @(posedge clk);
    $display("mechanisms: mul(lower,u)=%0d mulh(s)=%0d mulhsu(m)=%0d mulhu(u)=%0d illegal=%0d back_to_back=%0d gap=%0d",
             n_mul, n_mulh, n_mulhsu, n_mulhu, n_illegal, n_b2b, n_gap);
    checks++;
    if (n_mul == 0 || n_mulh == 0 || n_mulhsu == 0 || n_mulhu == 0 || n_illegal == 0 ||
        n_b2b == 0 || n_gap == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

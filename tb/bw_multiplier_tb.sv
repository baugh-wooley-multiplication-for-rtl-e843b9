// bw_multiplier_tb: self-checking testbench for bw_multiplier.
//
// N = 2, 3, 4 and 5: every operand pair in unsigned, signed and mixed mode,
// including the worked example 1001 x 0101 = 45 (unsigned, N = 4). N = 32: corner operands
// and random ones in all three modes. Every 2N-bit product is compared with
// the exact product computed here from the operand values, with a and b
// sign-extended as the mode requires (signed: both; mixed: b only).
module bw_multiplier_tb;
  logic [3:0]  a4, b4;
  logic [31:0] a32, b32;
  logic        s, m;
  logic [7:0]  p4;
  logic [63:0] p32;
  int checks = 0, failures = 0;

  bw_multiplier #(.N(4))  dut4  (.a(a4),  .b(b4),  .s(s), .m(m), .p(p4));
  bw_multiplier          dut32 (.a(a32), .b(b32), .s(s), .m(m), .p(p32));

  // further small widths, each checked exhaustively
  logic [1:0] a2, b2;  logic [3:0] p2;
  logic [2:0] a3, b3;  logic [5:0] p3;
  logic [4:0] a5, b5;  logic [9:0] p5;
  bw_multiplier #(.N(2)) dut2 (.a(a2), .b(b2), .s(s), .m(m), .p(p2));
  bw_multiplier #(.N(3)) dut3 (.a(a3), .b(b3), .s(s), .m(m), .p(p3));
  bw_multiplier #(.N(5)) dut5 (.a(a5), .b(b5), .s(s), .m(m), .p(p5));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] ref_prod(input logic [63:0] a, input logic [63:0] b,
                                            input int n, input logic s, input logic m);
    logic signed [127:0] av, bv;
    av = $signed({64'd0, a});
    bv = $signed({64'd0, b});
    if (s && a[n-1]) av = av - (128'sd1 <<< n);
    if ((s || m) && b[n-1]) bv = bv - (128'sd1 <<< n);
    return 128'(av * bv);
  endfunction

  task automatic check(input logic [63:0] got, input logic [63:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s s=%b m=%b a4=%h b4=%h a32=%h b32=%h got=%h exp=%h", what, s, m,
               a4, b4, a32, b32, got, exp);
    end
  endtask

  logic [31:0] corners [6] = '{32'h0, 32'h1, 32'hffffffff, 32'h80000000, 32'h7fffffff, 32'h80000001};

  initial begin
    // worked example: 9 x 5 = 45, unsigned
    s = 0; m = 0; a4 = 4'b0101; b4 = 4'b1001; a32 = 0; b32 = 0;
    #1 check({56'd0, p4}, 64'd45, "9x5");
    // signed 4-bit: -7 x 5 = -35 -> 8'hdd
    s = 1;
    #1 check({56'd0, p4}, {56'd0, 8'hdd}, "-7x5");
    for (int md = 0; md < 3; md++) begin
      s = (md == 1);
      m = (md == 2);
      for (int x = 0; x < 16; x++) begin
        for (int y = 0; y < 16; y++) begin
          a4 = 4'(x);
          b4 = 4'(y);
          #1 check({56'd0, p4}, {56'd0, 8'(ref_prod({60'd0, a4}, {60'd0, b4}, 4, s, m))}, "N=4");
        end
      end
      for (int x = 0; x < 32; x++) begin
        for (int y = 0; y < 32; y++) begin
          a2 = 2'(x);
          b2 = 2'(y);
          a3 = 3'(x);
          b3 = 3'(y);
          a5 = 5'(x);
          b5 = 5'(y);
          #1;
          if (x < 4 && y < 4)
            check({60'd0, p2}, {60'd0, 4'(ref_prod({62'd0, a2}, {62'd0, b2}, 2, s, m))}, "N=2");
          if (x < 8 && y < 8)
            check({58'd0, p3}, {58'd0, 6'(ref_prod({61'd0, a3}, {61'd0, b3}, 3, s, m))}, "N=3");
          check({54'd0, p5}, {54'd0, 10'(ref_prod({59'd0, a5}, {59'd0, b5}, 5, s, m))}, "N=5");
        end
      end
      for (int x = 0; x < 6; x++) begin
        for (int y = 0; y < 6; y++) begin
          a32 = corners[x];
          b32 = corners[y];
          #1 check(p32, 64'(ref_prod({32'd0, a32}, {32'd0, b32}, 32, s, m)), "N=32 corner");
        end
      end
      for (int t = 0; t < 3000; t++) begin
        a32 = $urandom;
        b32 = $urandom;
        #1 check(p32, 64'(ref_prod({32'd0, a32}, {32'd0, b32}, 32, s, m)), "N=32 random");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

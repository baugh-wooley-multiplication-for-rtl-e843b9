// bw_pp_gen_tb: self-checking testbench for bw_pp_gen.
//
// For N = 4 every operand pair in all three modes, and for N = 32 random and
// corner operands, the rows produced by the generator are added here with
// ordinary arithmetic and compared with the exact product worked out from
// the operands' values (sign-extended where the mode says two's complement).
// It also checks the row shapes: row i holds nothing below bit i, and in
// unsigned mode every row is exactly b AND a_i shifted by i.
module bw_pp_gen_tb;
  logic [3:0]  a4, b4;
  logic [31:0] a32, b32;
  logic        s, m;
  logic [7:0]  pp4 [4];
  logic [63:0] pp32 [32];
  int checks = 0, failures = 0;

  bw_pp_gen #(.N(4))  dut4  (.a(a4),  .b(b4),  .s(s), .m(m), .pp(pp4));
  bw_pp_gen #(.N(32)) dut32 (.a(a32), .b(b32), .s(s), .m(m), .pp(pp32));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // exact product of n-bit a and b in the given mode, modulo 2^(2n)
  function automatic logic [127:0] ref_prod(input logic [63:0] a, input logic [63:0] b,
                                            input int n, input logic s, input logic m);
    logic signed [127:0] av, bv;
    av = $signed({64'd0, a});
    bv = $signed({64'd0, b});
    if (s && a[n-1]) av = av - (128'sd1 <<< n);
    if ((s || m) && b[n-1]) bv = bv - (128'sd1 <<< n);
    return 128'(av * bv);
  endfunction

  task automatic check4();
    logic [7:0] sum, exp;
    sum = pp4[0] + pp4[1] + pp4[2] + pp4[3];
    exp = 8'(ref_prod({60'd0, a4}, {60'd0, b4}, 4, s, m));
    checks++;
    if (sum !== exp) begin
      failures++;
      $display("FAIL N=4 s=%b m=%b a=%h b=%h sum=%h exp=%h", s, m, a4, b4, sum, exp);
    end
  endtask

  task automatic check32();
    logic [63:0] sum, exp;
    logic shape_ok;
    sum = '0;
    shape_ok = 1'b1;
    for (int i = 0; i < 32; i++) begin
      sum += pp32[i];
      if ((pp32[i] & ((64'd1 << i) - 64'd1)) != '0) shape_ok = 1'b0;
      if (!s && !m && pp32[i] != ({32'd0, b32 & {32{a32[i]}}} << i)) shape_ok = 1'b0;
    end
    exp = 64'(ref_prod({32'd0, a32}, {32'd0, b32}, 32, s, m));
    checks++;
    if (sum !== exp || !shape_ok) begin
      failures++;
      $display("FAIL N=32 s=%b m=%b a=%h b=%h sum=%h exp=%h shape_ok=%b", s, m, a32, b32,
               sum, exp, shape_ok);
    end
  endtask

  logic [31:0] corners [6] = '{32'h0, 32'h1, 32'hffffffff, 32'h80000000, 32'h7fffffff, 32'h80000001};

  initial begin
    a32 = '0;
    b32 = '0;
    for (int md = 0; md < 3; md++) begin
      s = (md == 1);
      m = (md == 2);
      for (int x = 0; x < 16; x++) begin
        for (int y = 0; y < 16; y++) begin
          a4 = 4'(x);
          b4 = 4'(y);
          #1 check4();
        end
      end
      for (int x = 0; x < 6; x++) begin
        for (int y = 0; y < 6; y++) begin
          a32 = corners[x];
          b32 = corners[y];
          #1 check32();
        end
      end
      for (int t = 0; t < 2000; t++) begin
        a32 = $urandom;
        b32 = $urandom;
        #1 check32();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

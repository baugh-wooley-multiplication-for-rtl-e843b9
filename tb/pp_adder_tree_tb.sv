// pp_adder_tree_tb: self-checking testbench for pp_adder_tree.
//
// Three instances: the default 32 rows of 64 bits, 5 rows of 8 bits (a row
// count that is not a power of two, so zero padding is exercised) and a
// single row. Random and all-ones operands are applied and the sum is
// compared with a sequential sum computed here, modulo 2^W.
module pp_adder_tree_tb;
  logic [63:0] r32 [32];
  logic [63:0] s32;
  logic [7:0]  r5 [5];
  logic [7:0]  s5;
  logic [15:0] r1 [1];
  logic [15:0] s1;
  int checks = 0, failures = 0;

  pp_adder_tree #(.ROWS(32), .W(64)) dut32 (.rows(r32), .sum(s32));
  pp_adder_tree #(.ROWS(5),  .W(8))  dut5  (.rows(r5),  .sum(s5));
  pp_adder_tree #(.ROWS(1),  .W(16)) dut1  (.rows(r1),  .sum(s1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [63:0] e64;
    logic [7:0]  e8;
    for (int t = 0; t < 500; t++) begin
      e64 = '0;
      e8  = '0;
      for (int r = 0; r < 32; r++) begin
        r32[r] = (t == 0) ? '1 : {$urandom, $urandom};
        e64 += r32[r];
      end
      for (int r = 0; r < 5; r++) begin
        r5[r] = (t == 0) ? 8'hff : 8'($urandom);
        e8 += r5[r];
      end
      r1[0] = 16'($urandom);
      #1;
      check("32x64", s32, e64);
      check("5x8", {56'd0, s5}, {56'd0, e8});
      check("1x16", {48'd0, s1}, {48'd0, r1[0]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adder_tree_shape: checks the pairing of the 7-operand adder tree used by
// the 14x14 multiplier, by looking at the internal level nodes:
//   level 1: x0+x1, x2+x3, x4 (waiting), x5+x6
//   level 2: x0+x1+x2+x3, x4+x5+x6
//   level 3: the sum of all seven
// With the rows of the 14x14 multiplier as x0..x6 this is the published tree
// (x5 = R4, x6 = R13 are added first, x4 joins them at level 2).
module tb_adder_tree_shape;
  int checks = 0, failures = 0;

  localparam int W = 28;
  logic [W-1:0] x [7];
  logic [W-1:0] s;

  adder_tree #(.W(W), .NIN(7)) u7 (.in(x), .sum(s));

  task automatic check(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < 7; i++) x[i] = W'($urandom);
      #1;
      check("L1[0]", u7.g_lvl[1].v[0], W'(x[0] + x[1]));
      check("L1[1]", u7.g_lvl[1].v[1], W'(x[2] + x[3]));
      check("L1[2]", u7.g_lvl[1].v[2], x[4]);
      check("L1[3]", u7.g_lvl[1].v[3], W'(x[5] + x[6]));
      check("L2[0]", u7.g_lvl[2].v[0], W'(x[0] + x[1] + x[2] + x[3]));
      check("L2[1]", u7.g_lvl[2].v[1], W'(x[4] + x[5] + x[6]));
      check("sum",   s, W'(x[0] + x[1] + x[2] + x[3] + x[4] + x[5] + x[6]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adder_tree: random check of the adder tree for 1, 2, 3, 7, 8 and 9
// operands. The reference sum is accumulated here in a 64-bit integer and
// reduced modulo 2^W. Operands are drawn near the top of the range so that
// carries out of every level are exercised. The shape of the tree is
// checked separately in tb_adder_tree_shape.
module tb_adder_tree;
  int checks = 0, failures = 0;

  localparam int W = 28;
  localparam int NMAX = 9;
  logic [W-1:0] x [NMAX];
  logic [W-1:0] s1, s2, s3, s7, s8, s9;

  adder_tree #(.W(W), .NIN(1)) u1 (.in(x[0:0]), .sum(s1));
  adder_tree #(.W(W), .NIN(2)) u2 (.in(x[0:1]), .sum(s2));
  adder_tree #(.W(W), .NIN(3)) u3 (.in(x[0:2]), .sum(s3));
  adder_tree #(.W(W), .NIN(7)) u7 (.in(x[0:6]), .sum(s7));
  adder_tree #(.W(W), .NIN(8)) u8 (.in(x[0:7]), .sum(s8));
  adder_tree #(.W(W), .NIN(9)) u9 (.in(x[0:8]), .sum(s9));

  function automatic logic [W-1:0] ref_sum(int n);
    longint unsigned acc = 0;
    for (int i = 0; i < n; i++) acc += longint'(x[i]);
    return W'(acc);
  endfunction

  task automatic check(int n, logic [W-1:0] got);
    checks++;
    if (got !== ref_sum(n)) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d got=%h exp=%h", n, got, ref_sum(n));
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
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < NMAX; i++) begin
        x[i] = W'($urandom);
        if (t % 3 == 0) x[i] = W'((1 << W) - 1 - ($urandom % 64));
      end
      #1;
      check(1, s1); check(2, s2); check(3, s3);
      check(7, s7); check(8, s8); check(9, s9);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

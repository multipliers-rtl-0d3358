// tb_mono_mult: exhaustive check of the monolithic multiplier.
//
// Five instances cover the shapes the 14x14 and 10x10 multipliers use:
// 4x4->8 and 5x5->10 (regular), 4x2->6 (edge group), 4x4->4 (saturation,
// product mod 2^4) and 4x2->2 (product mod 2^2). Every input combination of
// every instance is applied and compared with (a*b) mod 2^WR computed here
// with plain integer arithmetic.
module tb_mono_mult;
  int checks = 0, failures = 0;

  logic [4:0] a5, b5;
  logic [7:0]  r44;
  logic [9:0]  r55;
  logic [5:0]  r42;
  logic [3:0]  r44s;
  logic [1:0]  r42s;

  mono_mult #(.WA(4), .WB(4))            u44  (.a(a5[3:0]), .b(b5[3:0]), .r(r44));
  mono_mult #(.WA(5), .WB(5))            u55  (.a(a5),      .b(b5),      .r(r55));
  mono_mult #(.WA(4), .WB(2))            u42  (.a(a5[3:0]), .b(b5[1:0]), .r(r42));
  mono_mult #(.WA(4), .WB(4), .WR(4))    u44s (.a(a5[3:0]), .b(b5[3:0]), .r(r44s));
  mono_mult #(.WA(4), .WB(2), .WR(2))    u42s (.a(a5[3:0]), .b(b5[1:0]), .r(r42s));

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%0d b=%0d got=%0d exp=%0d", what, a5, b5, got, exp);
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
    for (int x = 0; x < 32; x++) begin
      for (int y = 0; y < 32; y++) begin
        a5 = 5'(x); b5 = 5'(y);
        #1;
        check("5x5->10", int'(r55), x * y);
        if (x < 16 && y < 16) begin
          check("4x4->8", int'(r44), x * y);
          check("4x4->4", int'(r44s), (x * y) % 16);
        end
        if (x < 16 && y < 4) begin
          check("4x2->6", int'(r42), x * y);
          check("4x2->2", int'(r42s), (x * y) % 4);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

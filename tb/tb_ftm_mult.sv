// tb_ftm_mult: checks the monolithic-based multiplier against a*b.
//
// Instances: 14x14 with M = 4 (the worked example, top group 2 bits) in
// regular and saturation arithmetic, 10x10 with M = 5 in both arithmetics,
// and 12x12 with M = 4 (groups divide the width exactly). Every instance
// sees exhaustive corner operands (0, 1, all ones, single bits) and random
// operands; the reference is a 64-bit integer product, truncated to N bits
// for saturation.
module tb_ftm_mult;
  int checks = 0, failures = 0;

  logic [13:0] a, b;
  logic [27:0] r14;
  logic [13:0] s14;
  logic [19:0] r10;
  logic [9:0]  s10;
  logic [23:0] r12;

  ftm_mult #(.N(14), .M(4), .SAT(1'b0)) u14r (.a(a),        .b(b),        .r(r14));
  ftm_mult #(.N(14), .M(4), .SAT(1'b1)) u14s (.a(a),        .b(b),        .r(s14));
  ftm_mult #(.N(10), .M(5), .SAT(1'b0)) u10r (.a(a[9:0]),   .b(b[9:0]),   .r(r10));
  ftm_mult #(.N(10), .M(5), .SAT(1'b1)) u10s (.a(a[9:0]),   .b(b[9:0]),   .r(s10));
  ftm_mult #(.N(12), .M(4), .SAT(1'b0)) u12r (.a(a[11:0]),  .b(b[11:0]),  .r(r12));

  task automatic check(string what, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  task automatic apply(logic [13:0] x, logic [13:0] y);
    longint unsigned p14, p10, p12;
    a = x; b = y;
    #1;
    p14 = longint'(x) * longint'(y);
    p10 = longint'(x[9:0]) * longint'(y[9:0]);
    p12 = longint'(x[11:0]) * longint'(y[11:0]);
    check("14x14->28", 64'(r14), p14);
    check("14x14->14", 64'(s14), p14 & 64'h3fff);
    check("10x10->20", 64'(r10), p10);
    check("10x10->10", 64'(s10), p10 & 64'h3ff);
    check("12x12->24", 64'(r12), p12);
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply('0, '0);
    apply('1, '1);
    apply('1, 14'd1);
    for (int i = 0; i < 14; i++)
      for (int j = 0; j < 14; j++) apply(14'(1 << i), 14'(1 << j));
    for (int t = 0; t < 20000; t++) apply(14'($urandom), 14'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

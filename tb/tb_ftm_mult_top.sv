// tb_ftm_mult_top: end-to-end test of the top at its default size
// (14x14 operands, 4x4 monolithic blocks), both arithmetics at once.
//
// Operands: corners, walking ones, and random values, about 200k vectors.
// Reference: the 28-bit integer product and its low 14 bits. The test also
// counts how often each mechanism of the design was really exercised and
// fails if one never was:
//   edge   - the narrow 2-bit top groups A_4/B_4 are non-zero
//   wrap   - the product is 2^14 or more, so the saturation result wraps
//   mod    - a straddling partial product (bit 8 or bit 12) has bits above
//            bit 13 that the truncated monolithic multipliers must drop
//   drop   - a redundant partial product (bit 16 or above) is non-zero
module tb_ftm_mult_top;
  int checks = 0, failures = 0;
  int n_edge = 0, n_wrap = 0, n_mod = 0, n_drop = 0;

  logic [13:0] a, b;
  logic [27:0] r_reg;
  logic [13:0] r_sat;

  ftm_mult_top dut (.a(a), .b(b), .r_reg(r_reg), .r_sat(r_sat));

  function automatic int grp(logic [13:0] x, int i);
    return (i == 3) ? int'(x[13:12]) : (int'(x) >> (4 * i)) & 15;
  endfunction

  task automatic apply(logic [13:0] x, logic [13:0] y);
    longint unsigned p;
    bit modded, dropped;
    a = x; b = y;
    #1;
    p = longint'(x) * longint'(y);
    checks++;
    if (64'(r_reg) != p) begin
      failures++;
      if (failures < 10) $display("FAIL regular a=%h b=%h got=%h exp=%h", x, y, r_reg, p);
    end
    checks++;
    if (64'(r_sat) != (p & 64'h3fff)) begin
      failures++;
      if (failures < 10) $display("FAIL saturation a=%h b=%h got=%h exp=%h", x, y, r_sat, p & 64'h3fff);
    end
    modded = 0; dropped = 0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        int pp;
        pp = grp(x, i) * grp(y, j);
        if (i + j == 2 && pp >= 64) modded = 1;
        if (i + j == 3 && pp >= 4)  modded = 1;
        if (i + j >= 4 && pp != 0)  dropped = 1;
      end
    if (x[13:12] != 0 || y[13:12] != 0) n_edge++;
    if (p >= 64'h4000) n_wrap++;
    if (modded)  n_mod++;
    if (dropped) n_drop++;
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply('0, '0);
    apply('1, '1);
    apply('1, 14'd1);
    apply(14'd1, '1);
    for (int i = 0; i < 14; i++)
      for (int j = 0; j < 14; j++) apply(14'(1 << i), 14'(1 << j));
    for (int t = 0; t < 200000; t++) apply(14'($urandom), 14'($urandom));
    $display("mechanisms: edge=%0d wrap=%0d mod=%0d drop=%0d", n_edge, n_wrap, n_mod, n_drop);
    checks += 4;
    if (n_edge == 0) failures++;
    if (n_wrap == 0) failures++;
    if (n_mod  == 0) failures++;
    if (n_drop == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

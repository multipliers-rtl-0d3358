// tb_mono_mult_table1: size of the unminimised cover of the monolithic
// multipliers from 2x2 to 5x5, regular (m x m -> 2m) and saturation
// (m x m -> m). The 6x6 to 8x8 blocks (4096 to 65536 minterm tests) are
// left out: the simulator takes too long to build their flattened covers,
// and the design does not use them. For each instance the number of minterms of its full DNF
// (MINTERMS, summed over the output bits) is compared with the published
// "truth table" counts:
//   regular:    14, 111, 678, 3733   (6x6..8x8: 18953, 92334, 434660)
//   saturation: 10,  68, 392, 2064   (6x6..8x8: 10272, 49216, 229504)
// and each instance is also exercised on random operands against a*b.
module tb_mono_mult_table1;
  int checks = 0, failures = 0;

  localparam int NM = 4;
  localparam int REG_CNT [NM] = '{14, 111, 678, 3733};
  localparam int SAT_CNT [NM] = '{10, 68, 392, 2064};

  logic [7:0]  a, b;
  logic [15:0] rr [NM];
  logic [7:0]  rs [NM];
  int mt_reg [NM];
  int mt_sat [NM];

  for (genvar g = 0; g < NM; g++) begin : g_m
    localparam int M = g + 2;
    logic [2*M-1:0] pr;
    logic [M-1:0]   ps;
    mono_mult #(.WA(M), .WB(M))         u_reg (.a(a[M-1:0]), .b(b[M-1:0]), .r(pr));
    mono_mult #(.WA(M), .WB(M), .WR(M)) u_sat (.a(a[M-1:0]), .b(b[M-1:0]), .r(ps));
    assign rr[g] = 16'(pr);
    assign rs[g] = 8'(ps);
    assign mt_reg[g] = u_reg.MINTERMS;
    assign mt_sat[g] = u_sat.MINTERMS;
  end

  task automatic check(string what, int m, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s m=%0d got=%0d exp=%0d", what, m, got, exp);
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
    a = '0; b = '0;
    #1;
    for (int g = 0; g < NM; g++) begin
      $display("%0dx%0d: minterms regular %0d, saturation %0d", g + 2, g + 2, mt_reg[g], mt_sat[g]);
      check("minterms regular", g + 2, mt_reg[g], REG_CNT[g]);
      check("minterms saturation", g + 2, mt_sat[g], SAT_CNT[g]);
    end
    for (int t = 0; t < 500; t++) begin
      a = 8'($urandom); b = 8'($urandom);
      #1;
      for (int g = 0; g < NM; g++) begin
        int m, x, y;
        m = g + 2;
        x = int'(a) & ((1 << m) - 1);
        y = int'(b) & ((1 << m) - 1);
        check("product", m, int'(rr[g]), x * y);
        check("product mod 2^m", m, int'(rs[g]), (x * y) & ((1 << m) - 1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pp_join: checks the joined rows of the 14x14, M = 4 multiplier against
// the row formulas written out by hand.
//
// Regular arithmetic (rows summed give the 28-bit product):
//   {R16,R11,R3,R1}, {R12,R7,R2,0000}, {R15,R10,R5,0000}, {R8,R6,0^8},
//   {R14,R9,0^8}, R4<<12, R13<<12
// Saturation arithmetic (14-bit rows; A1B3, A2B2, A3B1 kept mod 2^6, the
// four products at bit 12 kept mod 2^2, products at bit 16 and above absent):
//   {R3,R1}, {R4,R2,0000}, {R7,R5,0000}, R6<<8, R9<<8, R10<<12, R13<<12
// Rn stands for A_i*B_j with n = 4(i-1)+j, i.e. prod[n-1]. Products are
// random values of their true width; for saturation they carry random upper
// bits that the block must drop.
module tb_pp_join;
  int checks = 0, failures = 0;

  logic [7:0]  prod [16];
  logic [7:0]  sprod [16];
  logic [27:0] rows  [7];
  logic [13:0] srows [7];

  pp_join #(.N(14), .M(4), .SAT(1'b0)) u_reg (.prod(prod),  .rows(rows));
  pp_join #(.N(14), .M(4), .SAT(1'b1)) u_sat (.prod(sprod), .rows(srows));

  // R(n), 1-based as in the formulas
  function automatic logic [27:0] R(int n);
    return 28'(prod[n-1]);
  endfunction
  function automatic logic [27:0] S(int n, int w);
    return 28'(sprod[n-1] & 8'((1 << w) - 1));
  endfunction

  logic [27:0] exp_r [7];
  logic [27:0] exp_s [7];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int n = 1; n <= 16; n++) begin
        int i, j, w;
        i = (n - 1) / 4; j = (n - 1) % 4;
        w = ((i == 3) ? 2 : 4) + ((j == 3) ? 2 : 4);
        prod[n-1]  = 8'($urandom & ((1 << w) - 1));
        sprod[n-1] = 8'($urandom);
      end
      #1;
      exp_r[0] = (R(16) << 24) | (R(11) << 16) | (R(3) << 8) | R(1);
      exp_r[1] = (R(12) << 20) | (R(7) << 12) | (R(2) << 4);
      exp_r[2] = (R(15) << 20) | (R(10) << 12) | (R(5) << 4);
      exp_r[3] = (R(8) << 16) | (R(6) << 8);
      exp_r[4] = (R(14) << 16) | (R(9) << 8);
      exp_r[5] = R(4) << 12;
      exp_r[6] = R(13) << 12;
      exp_s[0] = (S(3, 6) << 8) | S(1, 8);
      exp_s[1] = (S(4, 2) << 12) | (S(2, 8) << 4);
      exp_s[2] = (S(7, 2) << 12) | (S(5, 8) << 4);
      exp_s[3] = S(6, 6) << 8;
      exp_s[4] = S(9, 6) << 8;
      exp_s[5] = S(10, 2) << 12;
      exp_s[6] = S(13, 2) << 12;
      for (int r = 0; r < 7; r++) begin
        checks += 2;
        if (rows[r] !== exp_r[r]) begin
          failures++;
          if (failures < 10) $display("FAIL regular row %0d got=%h exp=%h", r, rows[r], exp_r[r]);
        end
        if (srows[r] !== 14'(exp_s[r])) begin
          failures++;
          if (failures < 10) $display("FAIL saturation row %0d got=%h exp=%h", r, srows[r], exp_s[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

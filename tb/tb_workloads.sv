// tb_workloads: every multiplier size of the evaluation, in both
// arithmetics: N = 8, 10, ..., 32, built from 5x5 monolithic blocks for
// N = 10, 20, 30 and from 4x4 blocks otherwise. All 26 multipliers share the
// same random 32-bit operands (each takes the low N bits) and are checked
// against a 64-bit integer product, full for regular and mod 2^N for
// saturation arithmetic. The 32x32 regular product is checked through two
// 32-bit halves computed from 16-bit pieces, so the reference never
// overflows.
module tb_workloads;
  int checks = 0, failures = 0;

  localparam int NS = 13;
  localparam int SIZES [NS] = '{8, 10, 12, 14, 16, 18, 20, 22, 24, 26, 28, 30, 32};

  logic [31:0] a, b;
  logic [63:0] r_reg [NS];
  logic [63:0] r_sat [NS];

  for (genvar s = 0; s < NS; s++) begin : g_size
    localparam int N = SIZES[s];
    localparam int M = (N % 10 == 0) ? 5 : 4;
    logic [2*N-1:0] rr;
    logic [N-1:0]   rs;
    ftm_mult #(.N(N), .M(M), .SAT(1'b0)) u_reg (.a(a[N-1:0]), .b(b[N-1:0]), .r(rr));
    ftm_mult #(.N(N), .M(M), .SAT(1'b1)) u_sat (.a(a[N-1:0]), .b(b[N-1:0]), .r(rs));
    assign r_reg[s] = 64'(rr);
    assign r_sat[s] = 64'(rs);
  end

  // exact 64-bit product of two 32-bit values from 16-bit pieces
  function automatic logic [63:0] mul64(logic [31:0] x, logic [31:0] y);
    logic [63:0] ll, lh, hl, hh;
    ll = 64'(x[15:0])  * 64'(y[15:0]);
    lh = 64'(x[15:0])  * 64'(y[31:16]);
    hl = 64'(x[31:16]) * 64'(y[15:0]);
    hh = 64'(x[31:16]) * 64'(y[31:16]);
    return ll + (lh << 16) + (hl << 16) + (hh << 32);
  endfunction

  task automatic apply(logic [31:0] x, logic [31:0] y);
    a = x; b = y;
    #1;
    for (int s = 0; s < NS; s++) begin
      logic [63:0] mask, p;
      mask = (SIZES[s] == 32) ? 64'hffff_ffff : (64'd1 << SIZES[s]) - 1;
      p = mul64(x & 32'(mask), y & 32'(mask));
      checks += 2;
      if (r_reg[s] != p) begin
        failures++;
        if (failures < 10) $display("FAIL %0dx%0d regular a=%h b=%h got=%h exp=%h",
                                    SIZES[s], SIZES[s], x, y, r_reg[s], p);
      end
      if (r_sat[s] != (p & mask)) begin
        failures++;
        if (failures < 10) $display("FAIL %0dx%0d saturation a=%h b=%h got=%h exp=%h",
                                    SIZES[s], SIZES[s], x, y, r_sat[s], p & mask);
      end
    end
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
    apply('1, 32'd1);
    for (int i = 0; i < 32; i++)
      for (int j = 0; j < 32; j++) apply(32'(1 << i), 32'(1 << j));
    for (int t = 0; t < 8000; t++) apply($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

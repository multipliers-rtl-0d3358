// ftm_mult: N x N unsigned multiplier built from monolithic multipliers
// (operand splitting in the manner of the Fourier-transform method).
//
// A and B are cut into K = ceil(N/M) groups A_i, B_j (M bits each, the top
// group narrower when M does not divide N). Then
//     A*B = sum_i sum_j A_i*B_j * 2^(M*(i+j)).
// Every group product is one mono_mult, computed in parallel. The products
// are not added one by one: pp_join concatenates those that do not overlap
// into rows and adder_tree sums the rows, so a 14x14 multiplier needs 6
// adders in 3 levels instead of 15 adders in 4.
//
// SAT = 0, regular arithmetic: r is the full 2N-bit product.
// SAT = 1, saturation arithmetic in the sense of the method: r is the low N
// bits of the product, i.e. A*B mod 2^N (the result wraps, it is not clamped
// to the maximum). Products of weight 2^N or more are not built, and a
// product that straddles bit N uses a monolithic multiplier that returns
// only the bits below N (for 14x14, A_1*B_3 is needed mod 2^6 and A_1*B_4
// mod 2^2).
//
// Interface: a, b [N-1:0] unsigned; r [2N-1:0] (SAT=0) or [N-1:0] (SAT=1).
// Purely combinational, no clock or reset. Defaults N = 14, M = 4 are the
// worked example of the method; it was evaluated for N = 8..32 with M = 5
// for N = 10, 20, 30 and M = 4 otherwise.
module ftm_mult
  import ftm_pkg::*;
#(
  parameter int N   = 14,
  parameter int M   = 4,
  parameter bit SAT = 1'b0,
  localparam int RW = res_w(N, SAT)
) (
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  output logic [RW-1:0] r
);

  localparam int K     = num_groups(N, M);
  localparam int PW    = 2 * M;
  localparam int NROWS = num_rows(N, M, SAT);

  logic [PW-1:0] prod [K*K];
  logic [RW-1:0] rows [NROWS];

  // monolithic multipliers, one per pair of operand groups
  for (genvar i = 0; i < K; i++) begin : g_a
    for (genvar j = 0; j < K; j++) begin : g_b
      localparam int WA = grp_w(N, M, i);
      localparam int WB = grp_w(N, M, j);
      localparam int WP = prod_w(N, M, SAT, i, j);
      if (WP > 0) begin : g_mm
        logic [WP-1:0] p;
        mono_mult #(.WA(WA), .WB(WB), .WR(WP)) u_mm (
          .a (a[M*i +: WA]),
          .b (b[M*j +: WB]),
          .r (p)
        );
        assign prod[i*K+j] = PW'(p);
      end else begin : g_redundant
        assign prod[i*K+j] = '0;
      end
    end
  end

  pp_join #(.N(N), .M(M), .SAT(SAT)) u_join (
    .prod (prod),
    .rows (rows)
  );

  adder_tree #(.W(RW), .NIN(NROWS)) u_tree (
    .in  (rows),
    .sum (r)
  );

endmodule

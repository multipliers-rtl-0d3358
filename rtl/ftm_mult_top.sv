// ftm_mult_top: the 14x14 monolithic-based multiplier in both arithmetics.
//
// One pair of unsigned operands feeds two multipliers built with 4x4
// monolithic blocks (the top 2-bit groups give 4x2, 2x4 and 2x2 blocks):
//   r_reg = A*B           (regular arithmetic, 28 bits, 16 monolithic
//                          multipliers, 7 joined rows, 6 adders, 3 levels)
//   r_sat = A*B mod 2^14  (saturation arithmetic, 14 bits, 10 monolithic
//                          multipliers of which 7 are truncated, 7 rows,
//                          6 adders, 3 levels)
// Both are purely combinational; a user that needs a clocked multiplier
// registers the operands and results around it. N and M may be changed to
// any of the evaluated sizes (N = 8..32; M = 5 for N = 10, 20, 30, else 4).
module ftm_mult_top #(
  parameter int N = 14,
  parameter int M = 4
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] r_reg,
  output logic [N-1:0]   r_sat
);

  ftm_mult #(.N(N), .M(M), .SAT(1'b0)) u_regular (
    .a (a),
    .b (b),
    .r (r_reg)
  );

  ftm_mult #(.N(N), .M(M), .SAT(1'b1)) u_saturation (
    .a (a),
    .b (b),
    .r (r_sat)
  );

endmodule

// pp_join: joins the partial products of the monolithic multipliers into
// the smallest set of rows that can be summed by the adder tree.
//
// A partial product A_i*B_j sits at bit M*(i+j) and is at most 2M bits
// wide, so products two diagonals apart never overlap and can be
// concatenated into one row instead of being added. Even diagonals fill the
// even rows, odd diagonals the odd rows; the number of rows of a parity is
// the largest number of products on one diagonal of that parity. Bits no
// product covers are zero. Placement (row and bit position of every product)
// is fixed at elaboration by the ftm_pkg functions; the block itself is only
// wiring, with no gate in the data path.
//
// For N = 14, M = 4, regular arithmetic, the output rows are
//   rows[0] = {R16,R11,R3,R1}          bits 27:0
//   rows[1] = {R12,R7,R2,0000}         bits 25:0
//   rows[2] = {R15,R10,R5,0000}        bits 25:0
//   rows[3] = {R8,R6,00000000}         bits 21:0
//   rows[4] = {R14,R9,00000000}        bits 21:0
//   rows[5] = R4  << 12,  rows[6] = R13 << 12
// where R(4(i-1)+j) = A_i*B_j, as in the joining technique of the method.
//
// Interface: prod[i*K+j] carries A_i*B_j (0-based i, j) zero-extended to 2M
// bits; entries of redundant products (saturation) are ignored. rows[r] are
// RW-bit rows, RW = 2N (regular) or N (saturation). Purely combinational.
module pp_join
  import ftm_pkg::*;
#(
  parameter int N   = 14,
  parameter int M   = 4,
  parameter bit SAT = 1'b0,
  localparam int K     = num_groups(N, M),
  localparam int PW    = 2 * M,
  localparam int RW    = res_w(N, SAT),
  localparam int NROWS = num_rows(N, M, SAT)
) (
  input  logic [PW-1:0] prod [K*K],
  output logic [RW-1:0] rows [NROWS]
);

  always_comb begin
    for (int r = 0; r < NROWS; r++) rows[r] = '0;
    for (int i = 0; i < K; i++) begin
      for (int j = 0; j < K; j++) begin
        if (prod_w(N, M, SAT, i, j) > 0) begin
          // placed products of one row never overlap, so OR is concatenation
          rows[row_of(N, M, SAT, i, j)] |=
            RW'((2*RW)'(prod[i*K+j] & PW'((1 << prod_w(N, M, SAT, i, j)) - 1))
                << prod_off(M, i, j));
        end
      end
    end
  end

endmodule

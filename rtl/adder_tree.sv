// adder_tree: balanced tree of two-input adders over NIN operands.
//
// Level 0 holds the input rows. Each level adds neighbouring pairs
// (0+1, 2+3, ...). When a level has an odd number of operands, the last two
// are still added to each other and the one before them (index CNT-3) is
// passed up unchanged, keeping its place in the order. The tree therefore
// uses exactly NIN-1 adders in ceil(log2(NIN)) levels. For the 7 rows of a
// 14x14 multiplier, in the order pp_join delivers them, this is the
// published tree: (row0+row1), (row2+row3), (R4+R13) with row4 waiting, then
// (row0+row1)+(row2+row3) and row4+(R4+R13), then the final sum: 6 adders in
// 3 levels. Every
// adder is W bits wide and the sum is taken modulo 2^W; bits that are
// constant zero in the operands are left for synthesis to remove.
//
// Interface: in[NIN] of W bits, sum[W-1:0]. Purely combinational.
module adder_tree
  import ftm_pkg::*;
#(
  parameter int W   = 28,
  parameter int NIN = 7,
  localparam int L  = tree_levels(NIN)
) (
  input  logic [W-1:0] in [NIN],
  output logic [W-1:0] sum
);

  // g_lvl[l].v[p]: operand p of level l (level 0 = inputs)
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    localparam int CNT = (NIN + (1 << l) - 1) >> l;   // operands at level l
    localparam int LP   = (l == 0) ? 0 : l - 1;
    localparam int PREV = (NIN + (1 << LP) - 1) >> LP; // operands at level l-1
    logic [W-1:0] v [CNT];
    for (genvar p = 0; p < CNT; p++) begin : g_node
      if (l == 0) begin : g_leaf
        assign v[p] = in[p];
      end else if (PREV % 2 == 1 && 2 * p == PREV - 3) begin : g_wait
        assign v[p] = g_lvl[l-1].v[PREV-3];
      end else if (PREV % 2 == 1 && 2 * p == PREV - 1) begin : g_last
        assign v[p] = g_lvl[l-1].v[PREV-2] + g_lvl[l-1].v[PREV-1];
      end else if (2 * p + 1 < PREV) begin : g_add
        assign v[p] = g_lvl[l-1].v[2*p] + g_lvl[l-1].v[2*p+1];
      end else begin : g_pass
        assign v[p] = g_lvl[l-1].v[2*p];
      end
    end
  end

  assign sum = g_lvl[L].v[0];

endmodule

// mono_mult: monolithic multiplier, a small unsigned multiplier built as one
// Boolean function of all its input bits.
//
// The block is specified by its truth table: for every combination of the
// WA + WB input bits the table holds the low WR bits of a*b. With WR = WA+WB
// it is the regular-arithmetic monolithic multiplier (4x4->8, 5x5->10, ...);
// with a smaller WR it is the saturation / modulo variant (4x4->4, or the
// 4x4 mod 2^2 product that a wider saturation multiplier needs at its edge).
//
// The logic is written as the full disjunctive normal form of that table:
// output bit k is the OR of the minterms ({a,b} == idx) of every input
// combination idx whose product has bit k set. MINTERMS counts those
// minterms over all output bits (678 for 4x4->8, 392 for 4x4->4), the size
// of the unminimised cover the method starts from. In the original method
// the cover is minimised off-line (Espresso, ELS) before synthesis; here
// minimisation is left to logic synthesis, and the minimised covers are not
// reproduced. There is no storage: the table is a constant used only to
// generate the cover.
//
// Interface: a[WA-1:0], b[WB-1:0] unsigned in, r[WR-1:0] = (a*b) mod 2^WR
// out. No clock; r follows the inputs after the combinational delay.
module mono_mult #(
  parameter int WA = 4,
  parameter int WB = 4,
  parameter int WR = WA + WB
) (
  input  logic [WA-1:0] a,
  input  logic [WB-1:0] b,
  output logic [WR-1:0] r
);

  localparam int ENTRIES = 1 << (WA + WB);

  typedef logic [WR-1:0] table_t [ENTRIES];

  // truth table, addressed by {a, b}
  function automatic table_t build_table();
    table_t t;
    for (int idx = 0; idx < ENTRIES; idx++) begin
      // a is the upper WA address bits, b the lower WB bits
      t[idx] = WR'((idx >> WB) * (idx & ((1 << WB) - 1)));
    end
    return t;
  endfunction

  localparam table_t TT = build_table();

  // number of minterms of the full DNF, summed over the output bits; it is
  // read by testbenches only, so lint reports it as an unused parameter
  function automatic int count_minterms();
    int n;
    n = 0;
    for (int idx = 0; idx < ENTRIES; idx++)
      for (int k = 0; k < WR; k++) n += int'(TT[idx][k]);
    return n;
  endfunction

  localparam int MINTERMS = count_minterms();

  initial begin
    assert (WR >= 1 && WR <= WA + WB)
      else $error("mono_mult: WR=%0d must be in 1..WA+WB", WR);
  end

  // full DNF: every input combination contributes its minterm to the
  // output bits that are 1 in its table entry
  always_comb begin
    r = '0;
    for (int idx = 0; idx < ENTRIES; idx++) begin
      if ({a, b} == (WA+WB)'(idx)) r = r | TT[idx];
    end
  end

endmodule

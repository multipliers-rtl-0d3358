// ftm_pkg: elaboration-time geometry of the monolithic-based multiplier.
//
// An N-bit operand is cut into K = ceil(N/M) groups, least significant
// first. All groups are M bits wide except the top one, which takes what is
// left (14 bits with M = 4 give 4 + 4 + 4 + 2). The product of group i of A
// and group j of B (0-based here, 1-based in the usual notation A_1..A_K) is
// a partial product of weight 2^(M*(i+j)).
//
// In saturation arithmetic only the low N bits of A*B are kept, so a partial
// product whose weight is 2^N or more is dropped, and one that straddles bit
// N is needed only modulo 2^(N - M*(i+j)).
//
// Partial products on the same diagonal d = i+j overlap each other, but two
// products on diagonals d and d+2 never do (a product is at most 2M bits
// wide). So every product of even diagonal goes into an "even" row, every
// product of odd diagonal into an "odd" row, and the rows are plain
// concatenations. Within a diagonal the products are ranked widest first,
// ties broken by the lower A group; rank r goes into the r-th row of its
// parity. The rows are ordered by rank, alternating which parity comes
// first (E0, O0, O1, E1, E2, O2, O3, ...). For 14x14 with M = 4 this
// reproduces the seven rows of the joining technique exactly and in their
// published order: {R16,R11,R3,R1}, {R12,R7,R2}, {R15,R10,R5}, {R8,R6},
// {R14,R9}, R4 and R13.
//
// All functions are constant functions, used only to size and place logic.
package ftm_pkg;

  // number of groups an N-bit operand is split into
  function automatic int num_groups(input int n, input int m);
    return (n + m - 1) / m;
  endfunction

  // width of group i (0-based, least significant first)
  function automatic int grp_w(input int n, input int m, input int i);
    int k;
    k = num_groups(n, m);
    return (i < k - 1) ? m : n - m * (k - 1);
  endfunction

  // bit position of partial product (i,j) in the result
  function automatic int prod_off(input int m, input int i, input int j);
    return m * (i + j);
  endfunction

  // result width: 2N in regular arithmetic, N in saturation arithmetic
  function automatic int res_w(input int n, input bit sat);
    return sat ? n : 2 * n;
  endfunction

  // number of product bits that are kept for partial product (i,j);
  // 0 means the product is redundant and is not built at all
  function automatic int prod_w(input int n, input int m, input bit sat,
                                input int i, input int j);
    int full, room;
    full = grp_w(n, m, i) + grp_w(n, m, j);
    if (!sat) return full;
    room = n - prod_off(m, i, j);
    if (room <= 0) return 0;
    return (room < full) ? room : full;
  endfunction

  // rank of partial product (i,j) within its diagonal: widest first,
  // then lower A group first
  function automatic int prod_rank(input int n, input int m, input bit sat,
                                   input int i, input int j);
    int k, w, w2, r;
    k = num_groups(n, m);
    w = prod_w(n, m, sat, i, j);
    r = 0;
    for (int i2 = 0; i2 < k; i2++) begin
      for (int j2 = 0; j2 < k; j2++) begin
        if (i2 + j2 == i + j) begin
          w2 = prod_w(n, m, sat, i2, j2);
          if (w2 > 0 && (w2 > w || (w2 == w && i2 < i))) r++;
        end
      end
    end
    return r;
  endfunction

  // number of rows of parity p (0 even diagonals, 1 odd diagonals)
  function automatic int rows_of_parity(input int n, input int m, input bit sat,
                                        input int p);
    int k, cnt, best;
    k = num_groups(n, m);
    best = 0;
    for (int d = p; d <= 2 * k - 2; d += 2) begin
      cnt = 0;
      for (int i = 0; i < k; i++) begin
        if (d - i >= 0 && d - i < k && prod_w(n, m, sat, i, d - i) > 0) cnt++;
      end
      if (cnt > best) best = cnt;
    end
    return best;
  endfunction

  // total number of joined rows, i.e. adder tree inputs
  function automatic int num_rows(input int n, input int m, input bit sat);
    return rows_of_parity(n, m, sat, 0) + rows_of_parity(n, m, sat, 1);
  endfunction

  // row that partial product (i,j) is joined into: rows are ordered by
  // rank; within a rank the even row comes first for even ranks and the odd
  // row first for odd ranks (E0,O0,O1,E1,E2,O2,O3,... as far as they exist)
  function automatic int row_of(input int n, input int m, input bit sat,
                                input int i, input int j);
    int r, ne, no, p, base;
    r  = prod_rank(n, m, sat, i, j);
    ne = rows_of_parity(n, m, sat, 0);
    no = rows_of_parity(n, m, sat, 1);
    p  = (i + j) % 2;
    base = ((r < ne) ? r : ne) + ((r < no) ? r : no);
    if (p == r % 2) return base;                      // first of its rank
    return base + ((p == 1) ? ((r < ne) ? 1 : 0) : ((r < no) ? 1 : 0));
  endfunction

  // number of levels of a binary tree over n inputs: ceil(log2(n))
  function automatic int tree_levels(input int n);
    int l;
    l = 0;
    while ((1 << l) < n) l++;
    return l;
  endfunction

endpackage

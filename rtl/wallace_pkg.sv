// wallace_pkg: elaboration-time description of the Wallace reduction schedule.
//
// An N x N unsigned multiplication starts as N partial-product rows; row i
// occupies columns i .. i+N-1. Each reduction stage takes the rows top-down
// in groups of three. Inside a group, a column that holds three bits gets a
// full adder, one that holds two bits a half adder, and a lone bit passes
// through. Every group therefore becomes a sum row (same columns) and a carry
// row (shifted one column left). Rows that do not fill a group of three pass
// to the next stage unchanged. Stages repeat until two rows are left; for
// N = 8 that is 8 -> 6 -> 4 -> 3 -> 2 rows, i.e. four stages.
//
// Because all rows stay contiguous column ranges, a row is described by its
// lowest and highest occupied column. The functions below replay the
// schedule to give, for any stage, the row count, each row's column range and
// the number of full and half adders. They are used as constant functions by
// wallace_stage, wallace_tree and wallace_multiplier, so the tree is generic
// in N while its default (N = 8) is the 8-bit multiplier of the source design.
// Nothing here is hardware.
package wallace_pkg;

  localparam int MAX_ROWS = 64;  // supports N up to 64

  // Rows entering stage s (s = 0 is the partial-product matrix).
  function automatic int rows_at(int n, int s);
    int r;
    r = n;
    for (int i = 0; i < s; i++) r = 2 * (r / 3) + r % 3;
    return r;
  endfunction

  // Number of reduction stages until at most two rows are left.
  function automatic int num_stages(int n);
    int r, s;
    r = n;
    s = 0;
    while (r > 2) begin
      r = 2 * (r / 3) + r % 3;
      s++;
    end
    return s;
  endfunction

  // Lowest (want_hi = 0) or highest (want_hi = 1) occupied column of row
  // `row` entering stage s. Returns -1 for a row that does not exist.
  function automatic int row_edge(int n, int s, int row, bit want_hi);
    int lo  [MAX_ROWS];
    int hi  [MAX_ROWS];
    int nlo [MAX_ROWS];
    int nhi [MAX_ROWS];
    int r, nr, cnt, cmin, cmax, g0;
    for (int i = 0; i < MAX_ROWS; i++) begin
      lo[i] = -1; hi[i] = -1; nlo[i] = -1; nhi[i] = -1;
    end
    for (int i = 0; i < n; i++) begin
      lo[i] = i;
      hi[i] = i + n - 1;
    end
    r = n;
    for (int st = 0; st < s; st++) begin
      nr = 0;
      for (int g = 0; g < r / 3; g++) begin
        g0 = 3 * g;
        // sum row: every column occupied by at least one row of the group
        cmin = lo[g0];
        cmax = hi[g0];
        for (int k = 1; k < 3; k++) begin
          if (lo[g0+k] < cmin) cmin = lo[g0+k];
          if (hi[g0+k] > cmax) cmax = hi[g0+k];
        end
        nlo[nr] = cmin;
        nhi[nr] = cmax;
        // carry row: columns occupied by two or three rows, shifted left
        nlo[nr+1] = -1;
        nhi[nr+1] = -1;
        for (int c = cmin; c <= cmax; c++) begin
          cnt = 0;
          for (int k = 0; k < 3; k++)
            if (c >= lo[g0+k] && c <= hi[g0+k]) cnt++;
          if (cnt >= 2) begin
            if (nlo[nr+1] < 0) nlo[nr+1] = c + 1;
            nhi[nr+1] = c + 1;
          end
        end
        nr += 2;
      end
      for (int k = 3 * (r / 3); k < r; k++) begin
        nlo[nr] = lo[k];
        nhi[nr] = hi[k];
        nr++;
      end
      for (int i = 0; i < MAX_ROWS; i++) begin
        lo[i] = (i < nr) ? nlo[i] : -1;
        hi[i] = (i < nr) ? nhi[i] : -1;
      end
      r = nr;
    end
    if (row >= r) return -1;
    return want_hi ? hi[row] : lo[row];
  endfunction

  // 1 if row `row` entering stage s occupies column c.
  function automatic int occupies(int n, int s, int row, int c);
    int l, h;
    l = row_edge(n, s, row, 1'b0);
    h = row_edge(n, s, row, 1'b1);
    return (l >= 0 && c >= l && c <= h) ? 1 : 0;
  endfunction

  // Bits of group g (rows 3g..3g+2) entering stage s that sit in column c.
  function automatic int group_height(int n, int s, int g, int c);
    return occupies(n, s, 3*g, c) + occupies(n, s, 3*g+1, c) + occupies(n, s, 3*g+2, c);
  endfunction

  // Full adders (height 3) or half adders (height 2) used by stage s.
  function automatic int cells_in_stage(int n, int s, int height);
    int total;
    total = 0;
    for (int g = 0; g < rows_at(n, s) / 3; g++)
      for (int c = 0; c < 2 * n + 1; c++)
        if (group_height(n, s, g, c) == height) total++;
    return total;
  endfunction

  // Highest column occupied by any row at any stage.
  function automatic int max_column(int n);
    int m;
    m = 0;
    for (int s = 0; s <= num_stages(n); s++)
      for (int row = 0; row < rows_at(n, s); row++)
        if (row_edge(n, s, row, 1'b1) > m) m = row_edge(n, s, row, 1'b1);
    return m;
  endfunction

endpackage

// tb_wallace_stage: self-check of the four reduction stages of the 8-bit
// tree (S1..S4), each instance driven on its own.
//
// The expected row shapes are written out by hand below from the
// three-rows-per-group rule (8 -> 6 -> 4 -> 3 -> 2 rows). Each stage gets
// random bits inside its input rows' column ranges; the checks are
//   - the weighted sum of the output rows equals that of the input rows
//     (a reduction stage must not change the number it represents),
//   - every output bit outside the expected output ranges is 0,
//   - the per-stage full/half adder counts of the schedule: S1 12/4, S2 13/3,
//     S4 7/4 as in the source's gate table, S3 6/4 (the table says 8/4;
//     6 is what makes the source's stated total of 38 full adders).
module tb_wallace_stage;
  import wallace_pkg::*;
  localparam int N  = 8;
  localparam int NS = 4;

  // Column ranges {lo, hi} of the rows entering stage s (s = 4: tree output).
  int lo_tab [NS+1][8];
  int hi_tab [NS+1][8];
  int nrows  [NS+1] = '{8, 6, 4, 3, 2};

  logic [7:0][15:0] r0;
  logic [5:0][15:0] r1_in, r1_out;
  logic [3:0][15:0] r2_in, r2_out;
  logic [2:0][15:0] r3_in, r3_out;
  logic [1:0][15:0] r4_out;

  int checks = 0, failures = 0;

  wallace_stage #(.N(N), .STAGE(0)) s1 (.rows_in(r0),    .rows_out(r1_out));
  wallace_stage #(.N(N), .STAGE(1)) s2 (.rows_in(r1_in), .rows_out(r2_out));
  wallace_stage #(.N(N), .STAGE(2)) s3 (.rows_in(r2_in), .rows_out(r3_out));
  wallace_stage #(.N(N), .STAGE(3)) s4 (.rows_in(r3_in), .rows_out(r4_out));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] rand_row(int lo, int hi);
    logic [15:0] v;
    v = 16'($urandom);
    for (int c = 0; c < 16; c++) if (c < lo || c > hi) v[c] = 1'b0;
    return v;
  endfunction

  function automatic longint weight(logic [7:0][15:0] m, int n);
    longint t;
    t = 0;
    for (int r = 0; r < n; r++) t += longint'(m[r]);
    return t;
  endfunction

  // Checks one stage's output against its input and the expected shape.
  task automatic check_stage(int s, logic [7:0][15:0] mi, logic [7:0][15:0] mo);
    logic [15:0] mask;
    checks++;
    if (weight(mi, nrows[s]) != weight(mo, nrows[s+1])) begin
      failures++;
      $display("FAIL S%0d value %0d -> %0d", s + 1, weight(mi, nrows[s]), weight(mo, nrows[s+1]));
    end
    for (int r = 0; r < nrows[s+1]; r++) begin
      mask = '0;
      for (int c = lo_tab[s+1][r]; c <= hi_tab[s+1][r]; c++) mask[c] = 1'b1;
      checks++;
      if ((mo[r] & ~mask) != '0) begin
        failures++;
        $display("FAIL S%0d row %0d has bits outside columns %0d..%0d: %h",
                 s + 1, r, lo_tab[s+1][r], hi_tab[s+1][r], mo[r]);
      end
    end
  endtask

  task automatic check_count(int s, int fa, int ha);
    checks++;
    if (cells_in_stage(N, s, 3) != fa || cells_in_stage(N, s, 2) != ha) begin
      failures++;
      $display("FAIL S%0d uses %0d FA / %0d HA, expected %0d / %0d", s + 1,
               cells_in_stage(N, s, 3), cells_in_stage(N, s, 2), fa, ha);
    end
  endtask

  initial begin
    logic [7:0][15:0] mi, mo;
    for (int i = 0; i < 8; i++) begin lo_tab[0][i] = i; hi_tab[0][i] = i + 7; end
    lo_tab[1][0:5] = '{0, 2, 3, 5, 6, 7};   hi_tab[1][0:5] = '{9, 9, 12, 12, 13, 14};
    lo_tab[2][0:3] = '{0, 3, 5, 7};         hi_tab[2][0:3] = '{12, 10, 14, 14};
    lo_tab[3][0:2] = '{0, 4, 7};            hi_tab[3][0:2] = '{14, 13, 14};
    lo_tab[4][0:1] = '{0, 5};               hi_tab[4][0:1] = '{14, 15};

    check_count(0, 12, 4);
    check_count(1, 13, 3);
    check_count(2, 6, 4);
    check_count(3, 7, 4);

    for (int k = 0; k < 3000; k++) begin
      for (int r = 0; r < 8; r++) r0[r]    = rand_row(lo_tab[0][r], hi_tab[0][r]);
      for (int r = 0; r < 6; r++) r1_in[r] = rand_row(lo_tab[1][r], hi_tab[1][r]);
      for (int r = 0; r < 4; r++) r2_in[r] = rand_row(lo_tab[2][r], hi_tab[2][r]);
      for (int r = 0; r < 3; r++) r3_in[r] = rand_row(lo_tab[3][r], hi_tab[3][r]);
      if (k == 0) begin  // every input bit set: all adders produce carries
        for (int r = 0; r < 8; r++) r0[r]    = mask_of(0, r);
        for (int r = 0; r < 6; r++) r1_in[r] = mask_of(1, r);
        for (int r = 0; r < 4; r++) r2_in[r] = mask_of(2, r);
        for (int r = 0; r < 3; r++) r3_in[r] = mask_of(3, r);
      end
      #1;
      mi = '0; mo = '0; mi[7:0] = r0;    mo[5:0] = r1_out; check_stage(0, mi, mo);
      mi = '0; mo = '0; mi[5:0] = r1_in; mo[3:0] = r2_out; check_stage(1, mi, mo);
      mi = '0; mo = '0; mi[3:0] = r2_in; mo[2:0] = r3_out; check_stage(2, mi, mo);
      mi = '0; mo = '0; mi[2:0] = r3_in; mo[1:0] = r4_out; check_stage(3, mi, mo);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] mask_of(int s, int r);
    logic [15:0] m;
    m = '0;
    for (int c = lo_tab[s][r]; c <= hi_tab[s][r]; c++) m[c] = 1'b1;
    return m;
  endfunction
endmodule

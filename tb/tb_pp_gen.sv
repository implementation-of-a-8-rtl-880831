// tb_pp_gen: exhaustive self-check of the 8 x 8 AND array.
// For every (a, b) pair each of the 64 bits must equal b[i] & a[j], and the
// shifted rows must add up to a * b.
module tb_pp_gen;
  localparam int N = 8;
  logic [N-1:0]        a, b;
  logic [N-1:0][N-1:0] pp;
  int checks = 0, failures = 0;

  pp_gen #(.N(N)) dut (.a(a), .b(b), .pp(pp));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned acc;
    int bad;
    for (int v = 0; v < (1 << (2 * N)); v++) begin
      {a, b} = 16'(v);
      #1;
      bad = 0;
      acc = 0;
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++)
          if (int'(pp[i][j]) != (((int'(b) >> i) & (int'(a) >> j)) & 1)) bad++;
        acc += int'(pp[i]) << i;
      end
      checks++;
      if (bad != 0 || acc != int'(a) * int'(b)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d b=%0d bad_bits=%0d rowsum=%0d", a, b, bad, acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

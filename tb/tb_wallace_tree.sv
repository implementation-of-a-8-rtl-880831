// tb_wallace_tree: exhaustive self-check of the 8-bit reduction tree.
// For every (a, b) the testbench forms the 64 partial products itself,
// drives them into the tree and checks that the two output rows add up to
// a * b, that reduce_out_b is zero in columns 0..4 and reduce_out_a is zero
// in column 15 (the shape that lets the final adder be 11 bits wide).
module tb_wallace_tree;
  localparam int N = 8;
  logic [N-1:0][N-1:0] pp;
  logic [2*N-1:0]      ra, rb;
  int checks = 0, failures = 0;

  wallace_tree #(.N(N)) dut (.pp(pp), .reduce_out_a(ra), .reduce_out_b(rb));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] a, b;
    for (int v = 0; v < (1 << (2 * N)); v++) begin
      {a, b} = 16'(v);
      for (int i = 0; i < N; i++) pp[i] = b[i] ? a : '0;
      #1;
      checks++;
      if (int'(ra) + int'(rb) != int'(a) * int'(b) || rb[4:0] != '0 || ra[15] != 1'b0) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d b=%0d rows %h + %h", a, b, ra, rb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

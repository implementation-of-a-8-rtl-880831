// tb_wallace_multiplier: self-check of the multiplier.
//   - N = 8 (default): all 65536 operand pairs, including the source's test
//     vectors 0 x 255 = 0, 1 x 1 = 1, 27 x 31 = 837 and the worst-case pair
//     255 x 255 = 65025, which are also checked by name;
//   - N = 3 and N = 4: all operand pairs (trees of one and two stages);
//   - N = 16: random operand pairs (a six-stage tree).
module tb_wallace_multiplier;
  logic [7:0]  a8, b8;
  logic [15:0] p8;
  logic [2:0]  a3, b3;
  logic [5:0]  p3;
  logic [3:0]  a4, b4;
  logic [7:0]  p4;
  logic [15:0] a16, b16;
  logic [31:0] p16;
  int checks = 0, failures = 0;

  wallace_multiplier            dut8  (.a(a8),  .b(b8),  .prod(p8));
  wallace_multiplier #(.N(3))  dut3  (.a(a3),  .b(b3),  .prod(p3));
  wallace_multiplier #(.N(4))  dut4  (.a(a4),  .b(b4),  .prod(p4));
  wallace_multiplier #(.N(16)) dut16 (.a(a16), .b(b16), .prod(p16));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check8(int x, int y, int expect_p);
    a8 = 8'(x); b8 = 8'(y);
    #1;
    checks++;
    if (int'(p8) != expect_p) begin
      failures++;
      $display("FAIL N=8 %0d x %0d = %0d, expected %0d", x, y, p8, expect_p);
    end
  endtask

  initial begin
    // The source's functional test cases, with their printed results.
    check8(0, 255, 0);
    check8(1, 1, 1);
    check8(27, 31, 837);
    check8(255, 255, 65025);
    for (int v = 0; v < 65536; v++) check8(v >> 8, v & 255, (v >> 8) * (v & 255));
    for (int v = 0; v < 64; v++) begin
      {a3, b3} = 6'(v);
      {a4, b4} = 8'(v * 4 + 3);
      #1;
      checks += 2;
      if (int'(p3) != int'(a3) * int'(b3)) begin
        failures++; $display("FAIL N=3 %0d x %0d = %0d", a3, b3, p3);
      end
      if (int'(p4) != int'(a4) * int'(b4)) begin
        failures++; $display("FAIL N=4 %0d x %0d = %0d", a4, b4, p4);
      end
    end
    for (int v = 0; v < 256; v++) begin
      {a4, b4} = 8'(v);
      #1;
      checks++;
      if (int'(p4) != int'(a4) * int'(b4)) begin
        failures++; $display("FAIL N=4 %0d x %0d = %0d", a4, b4, p4);
      end
    end
    a16 = '1; b16 = '1;
    for (int k = 0; k < 5000; k++) begin
      #1;
      checks++;
      if (p16 != 32'(longint'(a16) * longint'(b16))) begin
        failures++; $display("FAIL N=16 %0d x %0d = %0d", a16, b16, p16);
      end
      a16 = 16'($urandom); b16 = 16'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

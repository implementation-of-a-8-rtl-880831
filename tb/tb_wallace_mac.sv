// tb_wallace_mac: end-to-end self-check of the multiply-add unit at its
// default size (N = 8, C_W = 17, no parameter overrides).
//
// It applies the source's multiply-add test vector 111 x 223 + 14191 = 38944,
// its worst-case carry vector 255 x 255 + 65535, the largest possible result
// 255 x 255 + 131071, and then every one of the 65536 operand pairs with a
// random 17-bit addend. Each time both s = a*b + c and prod = a*b are
// compared with values computed here. It also counts how often the
// behaviours the design has to get right actually occurred, and fails if any
// never did:
//   - the source's two multiply-add vectors,
//   - a product with bit 15 set (the top column of the 11-bit final adder),
//   - an addend with bit 16 set (the accumulator's 17th full adder in use),
//   - a carry out of the accumulator into s[17],
//   - a full-length ripple through the accumulator (prod + c = 2^17 with
//     every bit position propagating).
module tb_wallace_mac;
  logic [7:0]  a, b;
  logic [16:0] c;
  logic [15:0] prod;
  logic [17:0] s;
  int checks = 0, failures = 0;
  int n_paper = 0, n_prod_msb = 0, n_c_msb = 0, n_acc_carry = 0, n_full_ripple = 0;

  wallace_mac dut (.a(a), .b(b), .c(c), .prod(prod), .s(s));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int x, int y, int z);
    int ep, es;
    a = 8'(x); b = 8'(y); c = 17'(z);
    #1;
    ep = x * y;
    es = ep + z;
    checks += 2;
    if (int'(prod) != ep) begin
      failures++;
      if (failures < 10) $display("FAIL prod %0d x %0d = %0d, expected %0d", x, y, prod, ep);
    end
    if (int'(s) != es) begin
      failures++;
      if (failures < 10) $display("FAIL s %0d x %0d + %0d = %0d, expected %0d", x, y, z, s, es);
    end
    if (ep >= 32768)                         n_prod_msb++;
    if (z >= 65536)                          n_c_msb++;
    if (es >= 131072)                        n_acc_carry++;
    if (((ep ^ z) & 32'h1fffe) == 32'h1fffe && (ep & z & 1) == 1) n_full_ripple++;
  endtask

  task automatic expect_value(int x, int y, int z, int printed);
    apply(x, y, z);
    checks++;
    if (int'(s) != printed) begin
      failures++;
      $display("FAIL %0d x %0d + %0d = %0d, the source prints %0d", x, y, z, s, printed);
    end else n_paper++;
  endtask

  task automatic need(string what, int count);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL never exercised: %s", what);
    end else $display("exercised %-34s %0d times", what, count);
  endtask

  initial begin
    expect_value(111, 223, 14191, 38944);   // source's MAC test case
    expect_value(255, 255, 65535, 130560);  // source's worst-case MAC inputs
    apply(255, 255, 131071);                 // largest result
    apply(1, 1, 131071);                     // 1 + (2^17 - 1): carry ripples all 17 bits
    for (int v = 0; v < 65536; v++) apply(v >> 8, v & 255, int'($urandom & 32'h1ffff));
    need("source test vectors", n_paper);
    need("product bit 15 set", n_prod_msb);
    need("addend bit 16 set", n_c_msb);
    need("accumulator carry into s[17]", n_acc_carry);
    need("17-bit carry ripple", n_full_ripple);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

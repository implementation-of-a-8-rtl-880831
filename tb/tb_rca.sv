// tb_rca: self-check of the ripple-carry adder at the two widths the design
// uses, 11 bits (final adder of the multiplier) and 17 bits (accumulator).
// Random operands and carry-in plus the all-ones cases (longest ripple);
// {c_out, sum} must equal a + b + c_in.
module tb_rca;
  logic [10:0] a11, b11, s11;
  logic [16:0] a17, b17, s17;
  logic        ci11, co11, ci17, co17;
  int checks = 0, failures = 0;

  rca #(.W(11)) dut11 (.a(a11), .b(b11), .c_in(ci11), .sum(s11), .c_out(co11));
  rca #(.W(17)) dut17 (.a(a17), .b(b17), .c_in(ci17), .sum(s17), .c_out(co17));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_once();
    longint e11, e17;
    #1;
    e11 = longint'(a11) + longint'(b11) + longint'(ci11);
    e17 = longint'(a17) + longint'(b17) + longint'(ci17);
    checks += 2;
    if ({co11, s11} != 12'(e11)) begin
      failures++;
      $display("FAIL W=11 %0d + %0d + %0d -> %0d", a11, b11, ci11, {co11, s11});
    end
    if ({co17, s17} != 18'(e17)) begin
      failures++;
      $display("FAIL W=17 %0d + %0d + %0d -> %0d", a17, b17, ci17, {co17, s17});
    end
  endtask

  initial begin
    // full-length carry ripple: all ones plus carry in, and all ones + 1
    a11 = '1; b11 = '0; ci11 = 1'b1; a17 = '1; b17 = '0; ci17 = 1'b1; check_once();
    a11 = '1; b11 = 11'd1; ci11 = 1'b0; a17 = '1; b17 = 17'd1; ci17 = 1'b0; check_once();
    a11 = '1; b11 = '1; ci11 = 1'b1; a17 = '1; b17 = '1; ci17 = 1'b1; check_once();
    for (int k = 0; k < 5000; k++) begin
      a11 = 11'($urandom); b11 = 11'($urandom); ci11 = 1'($urandom);
      a17 = 17'($urandom); b17 = 17'($urandom); ci17 = 1'($urandom);
      check_once();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

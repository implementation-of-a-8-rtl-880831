// tb_full_adder: exhaustive self-check of full_adder.
// All eight input combinations are applied; {c, s} must equal
// a + b + c_in. A watchdog ends the run with a failure if it hangs.
module tb_full_adder;
  logic a, b, c_in, s, c;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .c_in(c_in), .s(s), .c(c));

  initial begin : watchdog
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c_in} = 3'(v);
      #1;
      checks++;
      if ({c, s} != 2'(int'(a) + int'(b) + int'(c_in))) begin
        failures++;
        $display("FAIL a=%0b b=%0b c_in=%0b -> c=%0b s=%0b", a, b, c_in, c, s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

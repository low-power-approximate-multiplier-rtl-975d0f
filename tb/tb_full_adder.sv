// tb_full_adder: exhaustive check, a + b + c == 2*carry + sum.
module tb_full_adder;
  logic a, b, c, sum, carry;
  int checks = 0, failures = 0;

  full_adder dut (.a(a), .b(b), .c(c), .sum(sum), .carry(carry));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      checks++;
      if (2 * int'(carry) + int'(sum) != int'(a) + int'(b) + int'(c)) begin
        failures++;
        $display("FAIL a=%b b=%b c=%b -> carry=%b sum=%b", a, b, c, carry, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_full_adder

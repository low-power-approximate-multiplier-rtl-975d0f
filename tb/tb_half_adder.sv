// tb_half_adder: exhaustive check, a + b == 2*carry + sum.
module tb_half_adder;
  logic a, b, sum, carry;
  int checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .sum(sum), .carry(carry));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      checks++;
      if (2 * int'(carry) + int'(sum) != int'(a) + int'(b)) begin
        failures++;
        $display("FAIL a=%b b=%b -> carry=%b sum=%b", a, b, carry, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_half_adder

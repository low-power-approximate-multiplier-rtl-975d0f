// tb_exact_comp42: exhaustive check of the exact 4:2 compressor.
// For all 32 inputs: x1+x2+x3+x4+cin == sum + 2*(carry+cout), and cout
// does not depend on cin (so a cout->cin chain cannot ripple).
module tb_exact_comp42;
  logic [3:0] x;
  logic       cin, cout, carry, sum;
  int checks = 0, failures = 0;

  exact_comp42 dut (.x(x), .cin(cin), .cout(cout), .carry(carry), .sum(sum));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic cout0;
    for (int v = 0; v < 16; v++) begin
      for (int c = 0; c < 2; c++) begin
        x   = 4'(v);
        cin = 1'(c);
        #1;
        checks++;
        if (int'(sum) + 2 * (int'(carry) + int'(cout)) != $countones(x) + c) begin
          failures++;
          $display("FAIL x=%b cin=%b -> cout=%b carry=%b sum=%b", x, cin, cout, carry, sum);
        end
        if (c == 0) cout0 = cout;
        else begin
          checks++;
          if (cout !== cout0) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_exact_comp42

// tb_approx_comp42: exhaustive check of the approximate 4:2 compressor.
// All 16 input patterns are applied; Carry and Sum are compared with the
// compressor's truth table (written out below as literals, row = x4x3x2x1),
// and the value 2*Carry+Sum is compared with the input count: equal for
// every pattern except 1111, which must give 3.
module tb_approx_comp42;
  logic [3:0] x;
  logic       carry, sum;
  int checks = 0, failures = 0;

  // {carry,sum} for x = 0..15, x[0] = x1
  localparam logic [1:0] TT [16] = '{2'b00, 2'b01, 2'b01, 2'b10, 2'b01, 2'b10, 2'b10, 2'b11,
                                     2'b01, 2'b10, 2'b10, 2'b11, 2'b10, 2'b11, 2'b11, 2'b11};

  approx_comp42 dut (.x(x), .carry(carry), .sum(sum));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, err_patterns;
    err_patterns = 0;
    for (int v = 0; v < 16; v++) begin
      x = 4'(v);
      #1;
      checks++;
      if ({carry, sum} !== TT[v]) begin
        failures++;
        $display("FAIL x=%b carry/sum=%b%b expected %b", x, carry, sum, TT[v]);
      end
      n = $countones(x);
      checks++;
      if (2 * int'(carry) + int'(sum) != ((n == 4) ? 3 : n)) failures++;
      if (2 * int'(carry) + int'(sum) != n) err_patterns++;
    end
    checks++;
    if (err_patterns != 1) begin
      failures++;
      $display("FAIL %0d erroneous patterns, expected exactly 1", err_patterns);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_approx_comp42

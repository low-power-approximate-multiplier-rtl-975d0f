// tb_final_adder: the final adder against the integer sum of its two rows,
// on corner cases (all-ones rows, a long carry chain) and 20000 random pairs.
module tb_final_adder;
  import mult_pkg::*;
  row_t     row0, row1;
  product_t p;
  int checks = 0, failures = 0;

  final_adder dut (.row0(row0), .row1(row1), .p(p));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(int unsigned r0, int unsigned r1);
    row0 = row_t'(r0);
    row1 = row_t'(r1);
    #1;
    checks++;
    if (int'(p) != int'(r0 & 32'h7fff) + int'(r1 & 32'h7fff)) begin
      failures++;
      $display("FAIL %h + %h = %h", row0, row1, p);
    end
  endtask

  initial begin
    apply(0, 0);
    apply(32'h7fff, 32'h7fff);
    apply(32'h7fff, 1);
    apply(32'h5555, 32'h2aab);
    for (int k = 0; k < 20000; k++) apply($urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_final_adder

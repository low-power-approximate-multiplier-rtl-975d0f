// tb_pp_gen: exhaustive check of the partial-product generator.
// For all 65536 operand pairs: every bit pp[i][j] equals a[j]&b[i], and the
// weighted sum of all 64 bits equals a*b.
module tb_pp_gen;
  import mult_pkg::*;
  operand_t  a, b;
  pp_array_t pp;
  int checks = 0, failures = 0;

  pp_gen dut (.a(a), .b(b), .pp(pp));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned wsum;
    int bad_bits;
    for (int va = 0; va < 256; va++) begin
      for (int vb = 0; vb < 256; vb++) begin
        a = 8'(va);
        b = 8'(vb);
        #1;
        wsum = 0;
        bad_bits = 0;
        for (int i = 0; i < 8; i++) begin
          for (int j = 0; j < 8; j++) begin
            wsum += int'(pp[i][j]) << (i + j);
            if (pp[i][j] != (((va >> j) & (vb >> i) & 1) == 1)) bad_bits++;
          end
        end
        checks++;
        if (bad_bits != 0) failures++;
        checks++;
        if (wsum != va * vb) begin
          failures++;
          if (failures < 10) $display("FAIL a=%0d b=%0d weighted sum %0d", va, vb, wsum);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_pp_gen

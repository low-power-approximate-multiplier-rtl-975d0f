// tb_approx_mult8x8: exhaustive end-to-end test of the 8x8 approximate
// multiplier at its one and only size.
//
// All 65536 operand pairs are applied. Each product is checked
//   - bit for bit against the column-bag reference model (mult_ref_pkg),
//   - never above the exact product a*b (the compressors only lose value).
// Over operands 1..255 (65025 pairs) the error metrics must reproduce the
// published figures for this multiplier: error rate 6.994 %, normalised mean
// error distance (mean |error| / 255^2) 0.046 %, mean relative error about
// 0.109 % (the exact value is 0.1097 %, accepted in [0.1085, 0.1100)).
// It also counts the events that make the design what it is and fails if
// one never happened: a stage-1 and a stage-2 approximate compressor seeing
// 1111, the column-11 -> column-12 cout/cin link of the exact compressors
// carrying a 1, the column-12 cout into the column-13 full adder, and
// products that come out exact despite many partial-product ones.
module tb_approx_mult8x8;
  import mult_pkg::*;
  import mult_ref_pkg::*;

  operand_t a, b;
  product_t p;
  int checks = 0, failures = 0;
  int unsigned expect_p, exact, ed;
  int unsigned n_err = 0, n_all = 0;
  int unsigned ev_s1 = 0, ev_s2 = 0, ev_link11 = 0, ev_link12 = 0, ev_exact_dense = 0;
  longint unsigned sum_ed = 0;
  real sum_red = 0.0, er, nmed, mred;

  approx_mult8x8 dut (.a(a), .b(b), .p(p));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin

    for (int va = 0; va < 256; va++) begin
      for (int vb = 0; vb < 256; vb++) begin
        a = 8'(va);
        b = 8'(vb);
        #1;
        exact    = va * vb;
        expect_p = ref_mult(va, vb);
        checks++;
        if (int'(p) != expect_p || !shape_ok) begin
          failures++;
          if (failures < 10) $display("FAIL %0d*%0d: got %0d expected %0d (exact %0d)", va, vb, p, expect_p, exact);
        end
        checks++;
        if (int'(p) > exact) failures++;
        if (sat_s1 != 0) ev_s1++;
        if (sat_s2 != 0) ev_s2++;
        if (dut.ec11_cout) ev_link11++;
        if (dut.ec12_cout) ev_link12++;
        if (int'(p) == exact && $countones(a) >= 6 && $countones(b) >= 6) ev_exact_dense++;
        if (va != 0 && vb != 0) begin
          n_all++;
          if (int'(p) != exact) begin
            n_err++;
            ed       = exact - int'(p);
            sum_ed  += 64'(ed);
            sum_red += real'(ed) / real'(exact);
          end
        end
      end
    end

    er   = 100.0 * n_err / n_all;
    nmed = 100.0 * real'(sum_ed) / n_all / 65025.0;
    mred = 100.0 * sum_red / n_all;
    $display("error rate %0.4f %%  NMED %0.4f %%  MRED %0.4f %%  (%0d of %0d products wrong)", er, nmed, mred, n_err, n_all);
    $display("events: stage-1 saturation %0d, stage-2 saturation %0d, cout11 %0d, cout12 %0d, exact dense %0d",
             ev_s1, ev_s2, ev_link11, ev_link12, ev_exact_dense);
    checks++; if (!(er   >= 6.9935 && er   < 6.9945)) failures++;
    checks++; if (!(nmed >= 0.0455 && nmed < 0.0465)) failures++;
    checks++; if (!(mred >= 0.1085 && mred < 0.1100)) failures++;
    checks++; if (ev_s1 == 0) failures++;
    checks++; if (ev_s2 == 0) failures++;
    checks++; if (ev_link11 == 0) failures++;
    checks++; if (ev_link12 == 0) failures++;
    checks++; if (ev_exact_dense == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : tb_approx_mult8x8

// mult_ref_pkg: reference model of the approximate multiplier for testbenches.
//
// Written independently of the RTL netlist: it keeps, for every column of
// the dot diagram, a bag of bits, and applies the cells of each reduction
// stage as arithmetic on those bags (an approximate 4:2 compressor puts
// min(count,3) back as Sum/Carry; adders are exact). The result is the sum
// of the bits left after stage 2. It also counts how many approximate
// compressors of each stage saw 1111 in the last call (the only event that
// makes the product wrong), and checks that at most two bits per column
// remain for the final adder.
package mult_ref_pkg;
  bit          cb [17][8];
  int unsigned cn [17];
  bit          s1b[17][8];
  int unsigned sat_s1, sat_s2;   // approximate compressors that saw 1111
  bit          shape_ok;

  function automatic void put(int c, bit v);
    cb[c][cn[c]] = v;
    cn[c]++;
  endfunction

  function automatic int unsigned ppb(int unsigned a, int unsigned b, int i, int c);
    return ((a >> (c - i)) & (b >> i)) & 1;
  endfunction

  // approximate 4:2 on a count of ones: 0..3 exact, 4 -> 3
  function automatic void appx(int c, int unsigned n, int stage);
    int unsigned s;
    s = n;
    if (s == 4) begin
      if (stage == 1) sat_s1++; else sat_s2++;
      s = 3;
    end
    put(c, s[0]);
    put(c + 1, s[1]);
  endfunction

  function automatic void add(int c, int unsigned s);   // exact HA / FA
    put(c, s[0]);
    put(c + 1, s[1]);
  endfunction

  function automatic int unsigned ref_mult(int unsigned a, int unsigned b);
    int unsigned res;
    int unsigned t, u, cout11, cout12;
    foreach (cn[c]) cn[c] = 0;
    sat_s1 = 0;
    sat_s2 = 0;
    // stage 1 (pp(i,c) is partial-product row i in column c)
    for (int c = 0; c <= 3; c++) for (int i = 0; i <= c; i++) put(c, ppb(a, b, i, c) != 0);
    add(4, ppb(a,b,0,4) + ppb(a,b,1,4));
    for (int i = 2; i <= 4; i++) put(4, ppb(a, b, i, 4) != 0);
    appx(5, ppb(a,b,0,5) + ppb(a,b,1,5) + ppb(a,b,2,5) + ppb(a,b,3,5), 1);
    put(5, ppb(a,b,4,5) != 0); put(5, ppb(a,b,5,5) != 0);
    appx(6, ppb(a,b,0,6) + ppb(a,b,1,6) + ppb(a,b,2,6) + ppb(a,b,3,6), 1);
    add(6, ppb(a,b,4,6) + ppb(a,b,5,6));
    put(6, ppb(a,b,6,6) != 0);
    appx(7, ppb(a,b,0,7) + ppb(a,b,1,7) + ppb(a,b,2,7) + ppb(a,b,3,7), 1);
    appx(7, ppb(a,b,4,7) + ppb(a,b,5,7) + ppb(a,b,6,7) + ppb(a,b,7,7), 1);
    appx(8, ppb(a,b,1,8) + ppb(a,b,2,8) + ppb(a,b,3,8) + ppb(a,b,4,8), 1);
    add(8, ppb(a,b,5,8) + ppb(a,b,6,8) + ppb(a,b,7,8));
    appx(9, ppb(a,b,2,9) + ppb(a,b,3,9) + ppb(a,b,4,9) + ppb(a,b,5,9), 1);
    add(9, ppb(a,b,6,9) + ppb(a,b,7,9));
    appx(10, ppb(a,b,3,10) + ppb(a,b,4,10) + ppb(a,b,5,10) + ppb(a,b,6,10), 1);
    put(10, ppb(a,b,7,10) != 0);
    add(11, ppb(a,b,4,11) + ppb(a,b,5,11));
    put(11, ppb(a,b,6,11) != 0); put(11, ppb(a,b,7,11) != 0);
    for (int c = 12; c <= 14; c++) for (int i = c - 7; i <= 7; i++) put(c, ppb(a, b, i, c) != 0);
    shape_ok = 1;
    for (int c = 3; c <= 12; c++) if (cn[c] != 4) shape_ok = 0;
    // stage 2
    s1b = cb;
    foreach (cn[c]) cn[c] = 0;
    put(0, s1b[0][0]);
    put(1, s1b[1][0]); put(1, s1b[1][1]);
    add(2, int'(s1b[2][0]) + int'(s1b[2][1]));
    put(2, s1b[2][2]);
    for (int c = 3; c <= 10; c++) appx(c, int'(s1b[c][0]) + int'(s1b[c][1]) + int'(s1b[c][2]) + int'(s1b[c][3]), 2);
    // exact 4:2 in columns 11 and 12, cout(11) -> cin(12)
    t = int'(s1b[11][1]) + int'(s1b[11][2]) + int'(s1b[11][3]);
    cout11 = t >> 1;
    u = (t & 1) + int'(s1b[11][0]);
    put(11, u[0]); put(12, u[1]);
    t = int'(s1b[12][1]) + int'(s1b[12][2]) + int'(s1b[12][3]);
    cout12 = t >> 1;
    u = (t & 1) + int'(s1b[12][0]) + cout11;
    put(12, u[0]); put(13, u[1]);
    add(13, int'(s1b[13][0]) + int'(s1b[13][1]) + cout12);
    put(14, s1b[14][0]);
    res = 0;
    for (int c = 0; c < 17; c++) begin
      if (cn[c] > 2) shape_ok = 0;
      for (int k = 0; k < cn[c]; k++) res += int'(cb[c][k]) << c;
    end
    return res;
  endfunction
endpackage : mult_ref_pkg

// tb_fp16_pkg: reference conversions between FP16 bit patterns and real
// numbers for the testbenches, written independently of the RTL arithmetic
// (plain real arithmetic, no subnormals).
package tb_fp16_pkg;
  function automatic real fp16_to_real(logic [15:0] h);
    int  e;
    real m;
    e = int'(h[14:10]);
    if (e == 0) return 0.0;
    if (e == 31) return h[15] ? -1.0e30 : 1.0e30;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    return (h[15] ? -m : m) * (2.0 ** (e - 15));
  endfunction

  // nearest FP16 (ties away from zero; ties are not used by the tests)
  function automatic logic [15:0] real_to_fp16(real r);
    logic s;
    int   e;
    real  a, m;
    int   f;
    if (r == 0.0) return 16'h0000;
    s = (r < 0.0);
    a = s ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = int'((a - 1.0) * 1024.0 + 0.5);
    if (f == 1024) begin f = 0; e++; end
    if (e + 15 <= 0) return {s, 15'd0};
    if (e + 15 >= 31) return {s, 5'd31, 10'd0};
    return {s, 5'(e + 15), 10'(f)};
  endfunction

  // |a - b| within rel * max(|a|,|b|) + abs_tol
  function automatic bit close(real a, real b, real rel, real abs_tol);
    real d, m;
    d = (a > b) ? a - b : b - a;
    m = (a < 0 ? -a : a);
    if ((b < 0 ? -b : b) > m) m = (b < 0 ? -b : b);
    return d <= rel * m + abs_tol;
  endfunction
endpackage

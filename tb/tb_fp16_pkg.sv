// tb_fp16_pkg: reference conversions between FP16 bit patterns and real
// numbers for the self-checking testbenches. Written with real arithmetic
// only, independently of the FP16 functions of the design.
package tb_fp16_pkg;

  function automatic real fp16_to_real(input logic [15:0] h);
    int  e;
    real m, v;
    e = int'(h[14:10]);
    if (e == 31) v = 1.0e30;
    else if (e == 0) v = 0.0;
    else begin
      m = 1.0 + real'(h[9:0]) / 1024.0;
      v = m * (2.0 ** (e - 15));
    end
    return h[15] ? -v : v;
  endfunction

  // Nearest FP16 (normal range only) of a real, truncating far tails.
  function automatic logic [15:0] real_to_fp16(input real r);
    logic s;
    real  a, m;
    int   e, f;
    s = (r < 0.0);
    a = s ? -r : r;
    if (a < 6.2e-5) return {s, 15'd0};
    if (a >= 65504.0) return {s, 15'h7BFF};
    e = 0;
    m = a;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    f = int'((m - 1.0) * 1024.0);   // int'() of a real rounds to nearest
    if (f == 1024) begin f = 0; e++; end
    return {s, 5'(e + 15), 10'(f)};
  endfunction

  function automatic logic close(input real got, input real want, input real rel, input real abs_tol);
    real d;
    d = got - want;
    if (d < 0.0) d = -d;
    return (d <= abs_tol) || (d <= rel * ((want < 0.0) ? -want : want));
  endfunction

endpackage

// tb_fp_pkg: conversions between FP32 bit patterns and real numbers for the
// testbenches' reference models. Both work on the fields directly, so the
// reference arithmetic is done in double precision and does not depend on
// the design's FP units. Subnormals are treated as zero, matching the design.
package tb_fp_pkg;

  function automatic real f2r(input logic [31:0] b);
    int e;
    real m;
    e = int'(b[30:23]);
    if (e == 0) return 0.0;
    m = real'({1'b1, b[22:0]}) * (2.0 ** (e - 150));
    return b[31] ? -m : m;
  endfunction

  // Nearest FP32 to v (round-half-up on the mantissa; enough for stimulus).
  function automatic logic [31:0] r2f(input real v);
    logic s;
    int e;
    real m;
    longint mi;
    if (v == 0.0) return 32'd0;
    s = (v < 0.0);
    m = s ? -v : v;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    mi = longint'(m * 8388608.0 + 0.5);
    if (mi >= 64'd16777216) begin mi = mi / 2; e++; end
    if (e + 127 <= 0) return 32'd0;
    return {s, 8'(e + 127), mi[22:0]};
  endfunction

endpackage

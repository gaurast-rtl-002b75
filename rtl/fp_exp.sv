// fp_exp: combinational FP32 natural exponential, y = exp(x).
//
// The Gaussian-only unit the paper adds to each PE; the paper names it but
// gives no circuit, so the method here is this design's own. x is turned into
// a signed fixed-point number with 24 fraction bits and multiplied by
// log2(e), giving t = n + f with integer n = round(t) and |f| <= 1/2. 2^f is
// evaluated as exp(f*ln2) by a degree-5 Taylor polynomial in Q2.30 fixed point
// (truncation error below 3e-6 relative), and n becomes the result exponent.
// x < -87 gives 0 (the result would be subnormal), x > 88 gives infinity,
// |x| < 2^-30 gives 1. Purely combinational, no clock.
module fp_exp
  import gaurast_pkg::*;
(
  input  fp32_t x,
  output fp32_t y
);

  localparam longint LOG2E_Q30 = 64'sd1549082005;  // round(log2(e) * 2^30)
  localparam longint LN2_Q30   = 64'sd744261118;   // round(ln(2) * 2^30)
  localparam longint ONE_Q30   = 64'sd1073741824;
  localparam longint C2_Q30    = 64'sd536870912;   // 1/2
  localparam longint C3_Q30    = 64'sd178956971;   // 1/6
  localparam longint C4_Q30    = 64'sd44739243;    // 1/24
  localparam longint C5_Q30    = 64'sd8947849;     // 1/120

  logic [7:0]    ex;
  logic [23:0]   mx;
  longint        xf;      // x in Q.24
  longint        t;       // x*log2(e) in Q.24
  longint        n;
  longint        f;       // Q.24, |f| <= 0.5
  longint        z;       // f*ln2 in Q.30
  longint        p;       // polynomial in Q.30
  longint        e_res;
  logic [22:0]   man;

  always_comb begin
    ex = x[30:23];
    mx = {1'b1, x[22:0]};
    if (ex >= 8'd126) xf = longint'({40'd0, mx}) <<< (ex - 8'd126);
    else              xf = longint'({40'd0, mx}) >>> (8'd126 - ex);
    if (x[31]) xf = -xf;
    t = (xf * LOG2E_Q30) >>> 30;
    n = (t + 64'sd8388608) >>> 24;
    f = t - (n <<< 24);
    z = (f * LN2_Q30) >>> 24;
    p = C4_Q30 + ((z * C5_Q30) >>> 30);
    p = C3_Q30 + ((z * p) >>> 30);
    p = C2_Q30 + ((z * p) >>> 30);
    p = ONE_Q30 + ((z * p) >>> 30);
    p = ONE_Q30 + ((z * p) >>> 30);
    if (p >= ONE_Q30) begin
      man   = p[29:7];
      e_res = n + 64'sd127;
    end else begin
      man   = p[28:6];
      e_res = n + 64'sd126;
    end
    if (ex < 8'd97)                    y = FP_ONE;
    else if (ex >= 8'd134 && x[31])    y = FP_ZERO;
    else if (ex >= 8'd134)             y = FP_POS_INF;
    else if (e_res < 64'sd1)           y = FP_ZERO;
    else if (e_res > 64'sd254)         y = FP_POS_INF;
    else                               y = {1'b0, e_res[7:0], man};
  end

endmodule

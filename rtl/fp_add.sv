// fp_add: combinational IEEE-754 single-precision adder, y = a + b.
//
// The PE uses it for every addition and subtraction (a subtraction is an
// addition with the sign of b flipped). The paper builds its FP32 datapath
// from vendor floating-point IP; this is a plain replacement of this design's
// own: operands are aligned with guard, round and sticky bits, added or
// subtracted, normalised and rounded to nearest-even. Subnormal inputs and
// results are flushed to zero, an exponent overflow gives infinity, and NaN is
// not produced or propagated. Purely combinational, no clock.
module fp_add
  import gaurast_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sl, ss;
  logic [7:0]  ea, eb, el, es;
  logic [26:0] ml, ms, ms_sh;
  logic [27:0] sum;
  logic [7:0]  d;
  logic        sticky;
  logic [4:0]  lz;
  logic [9:0]  e_res;
  logic [26:0] norm;
  logic [24:0] rounded;
  logic        round_up;

  always_comb begin
    sa = a[31];
    sb = b[31];
    ea = a[30:23];
    eb = b[30:23];
    // larger magnitude first; subnormals count as zero
    if (b[30:0] > a[30:0]) begin
      sl = sb; el = eb; ml = (eb == 8'd0) ? 27'd0 : {1'b1, b[22:0], 3'b000};
      ss = sa; es = ea; ms = (ea == 8'd0) ? 27'd0 : {1'b1, a[22:0], 3'b000};
    end else begin
      sl = sa; el = ea; ml = (ea == 8'd0) ? 27'd0 : {1'b1, a[22:0], 3'b000};
      ss = sb; es = eb; ms = (eb == 8'd0) ? 27'd0 : {1'b1, b[22:0], 3'b000};
    end
    d = el - es;
    if (d > 8'd26) begin
      ms_sh  = 27'd0;
      sticky = (ms != 27'd0);
    end else begin
      ms_sh  = ms >> d;
      sticky = ((ms & ((27'd1 << d) - 27'd1)) != 27'd0);
    end
    ms_sh[0] = ms_sh[0] | sticky;

    if (sl == ss) sum = {1'b0, ml} + {1'b0, ms_sh};
    else          sum = {1'b0, ml} - {1'b0, ms_sh};

    // normalise
    e_res = {2'b00, el};
    lz    = 5'd0;
    norm  = 27'd0;
    if (sum[27]) begin
      norm  = {sum[27:2], sum[1] | sum[0]};
      e_res = e_res + 10'd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i] && lz == 5'd0 && norm == 27'd0) begin
          lz   = 5'(26 - i);
          norm = 27'(sum[26:0] << (26 - i));
        end
      end
      e_res = e_res - {5'd0, lz};
    end

    // round to nearest, ties to even
    round_up = norm[2] && (norm[1] || norm[0] || norm[3]);
    rounded  = {1'b0, norm[26:3]} + {24'd0, round_up};
    if (rounded[24]) begin
      rounded = rounded >> 1;
      e_res   = e_res + 10'd1;
    end

    if (sum == 28'd0 || ml == 27'd0) begin
      y = FP_ZERO;
    end else if (e_res[9] || e_res == 10'd0) begin
      y = {sl, 31'd0};                      // underflow: flush to zero
    end else if (e_res >= 10'd255) begin
      y = {sl, 8'hFF, 23'd0};               // overflow: infinity
    end else begin
      y = {sl, e_res[7:0], rounded[22:0]};
    end
  end

endmodule

// fp_mul: combinational IEEE-754 single-precision multiplier, y = a * b.
//
// The 24x24-bit significand product is normalised and rounded to
// nearest-even. Like fp_add it is this design's own stand-in for the vendor
// floating-point IP the paper uses: subnormal inputs and results are flushed
// to zero, exponent overflow gives infinity, NaN is not handled. Purely
// combinational, no clock.
module fp_mul
  import gaurast_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        s;
  logic [47:0] prod;
  logic [9:0]  e;
  logic [23:0] m;
  logic        g, st, round_up;
  logic [24:0] rounded;

  always_comb begin
    s    = a[31] ^ b[31];
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e    = {2'b00, a[30:23]} + {2'b00, b[30:23]} - 10'd127;
    if (prod[47]) begin
      m  = prod[47:24];
      g  = prod[23];
      st = (prod[22:0] != 23'd0);
      e  = e + 10'd1;
    end else begin
      m  = prod[46:23];
      g  = prod[22];
      st = (prod[21:0] != 22'd0);
    end
    round_up = g && (st || m[0]);
    rounded  = {1'b0, m} + {24'd0, round_up};
    if (rounded[24]) begin
      rounded = rounded >> 1;
      e       = e + 10'd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) y = {s, 31'd0};
    else if (e[9] || e == 10'd0)              y = {s, 31'd0};
    else if (e >= 10'd255)                    y = {s, 8'hFF, 23'd0};
    else                                      y = {s, e[7:0], rounded[22:0]};
  end

endmodule

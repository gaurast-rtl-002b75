// fp_div: combinational IEEE-754 single-precision divider, y = a / b.
//
// In the PE it is the triangle-only unit that forms 1/area for the
// barycentric weights (the paper's "depth division"). The significand quotient
// is taken to 26 bits plus a sticky bit by an integer division of the
// pre-shifted dividend, then normalised and rounded to nearest-even.
// Subnormals are flushed to zero, x/0 gives infinity with the XOR of the
// signs, NaN is not handled. This is this design's own circuit; the paper only
// names the unit. Purely combinational, no clock.
module fp_div
  import gaurast_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        s;
  logic [49:0] num;
  logic [26:0] q;
  logic [49:0] r;
  logic [9:0]  e;
  logic [23:0] m;
  logic        g, st, round_up;
  logic [24:0] rounded;

  always_comb begin
    s   = a[31] ^ b[31];
    num = {1'b1, a[22:0], 26'd0};
    q   = 27'(num / {26'd0, 1'b1, b[22:0]});
    r   = num % {26'd0, 1'b1, b[22:0]};
    e   = {2'b00, a[30:23]} - {2'b00, b[30:23]} + 10'd127;
    // quotient of two [1,2) significands lies in (0.5, 2): q has 26 or 27 bits
    if (q[26]) begin
      m  = q[26:3];
      g  = q[2];
      st = (q[1:0] != 2'd0) || (r != 50'd0);
    end else begin
      m  = q[25:2];
      g  = q[1];
      st = q[0] || (r != 50'd0);
      e  = e - 10'd1;
    end
    round_up = g && (st || m[0]);
    rounded  = {1'b0, m} + {24'd0, round_up};
    if (rounded[24]) begin
      rounded = rounded >> 1;
      e       = e + 10'd1;
    end
    if (b[30:23] == 8'd0)                     y = {s, 8'hFF, 23'd0};
    else if (a[30:23] == 8'd0)                y = {s, 31'd0};
    else if (e[9] || e == 10'd0)              y = {s, 31'd0};
    else if (e >= 10'd255)                    y = {s, 8'hFF, 23'd0};
    else                                      y = {s, e[7:0], rounded[22:0]};
  end

endmodule

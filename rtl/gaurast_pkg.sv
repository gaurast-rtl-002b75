// gaurast_pkg: types, constants and small FP32 helper functions shared by the
// enhanced rasterizer.
//
// A primitive is nine FP32 numbers in both modes. For a Gaussian they are the
// screen-space centre (mu_x, mu_y), the three entries of the inverse 2D
// covariance (conic a, b, c: Sigma^-1 = [a b; b c]), the opacity o and the RGB
// colour. For a triangle they are the three vertices (x, y, z) in screen space.
// A pixel result is three FP32 numbers: accumulated RGB for Gaussians, and the
// barycentric weights (u, v) plus depth for triangles. That both modes use nine
// inputs and three outputs follows the paper; the order of the fields inside
// the nine words is this design's choice.
//
// The helper functions are combinational and synthesizable: an exact
// unsigned-integer to FP32 conversion (used for pixel coordinates), FP32
// negation and an FP32 "less than" for the depth test.
package gaurast_pkg;

  typedef logic [31:0] fp32_t;

  typedef enum logic {
    MODE_TRI   = 1'b0,
    MODE_GAUSS = 1'b1
  } mode_e;

  localparam int unsigned PRIM_WORDS = 9;  // FP32 words per primitive
  localparam int unsigned PIX_WORDS  = 3;  // FP32 words per pixel result

  // Gaussian field positions inside a primitive
  localparam int unsigned G_MUX = 0, G_MUY = 1, G_CA = 2, G_CB = 3, G_CC = 4,
                          G_OPA = 5, G_R = 6, G_G = 7, G_B = 8;
  // Triangle field positions inside a primitive
  localparam int unsigned T_X0 = 0, T_Y0 = 1, T_Z0 = 2, T_X1 = 3, T_Y1 = 4,
                          T_Z1 = 5, T_X2 = 6, T_Y2 = 7, T_Z2 = 8;

  typedef fp32_t [PRIM_WORDS-1:0] prim_t;
  typedef fp32_t [PIX_WORDS-1:0]  pix_t;

  localparam fp32_t FP_ZERO    = 32'h0000_0000;
  localparam fp32_t FP_ONE     = 32'h3F80_0000;
  localparam fp32_t FP_NEG_HALF = 32'hBF00_0000;
  localparam fp32_t FP_POS_INF = 32'h7F80_0000;

  // Batch descriptor flags (word 0, bits 31 and 30)
  localparam int unsigned DESC_FIRST_BIT = 31;
  localparam int unsigned DESC_LAST_BIT  = 30;
  localparam int unsigned DESC_WORDS     = 4;

  // Memory-interface commands
  typedef enum logic [1:0] {
    DMA_FETCH_DESC = 2'd0,  // read DESC_WORDS words into the top controller
    DMA_LOAD_PRIM  = 2'd1,  // read primitives into a tile buffer
    DMA_STORE_PIX  = 2'd2   // write pixel results from a tile buffer
  } dma_op_e;

  function automatic fp32_t fp_neg(input fp32_t a);
    return {~a[31], a[30:0]};
  endfunction

  // Exact conversion of a 16-bit unsigned integer to FP32.
  function automatic fp32_t u16_to_fp32(input logic [15:0] v);
    logic [4:0]  msb;
    logic [22:0] man;
    msb = 5'd0;
    for (int i = 0; i < 16; i++) if (v[i]) msb = 5'(i);
    man = 23'({v, 23'b0} >> msb);
    if (v == 16'd0) return FP_ZERO;
    return {1'b0, 8'(8'd127 + 8'(msb)), man};
  endfunction

  // a < b for FP32 (no NaN handling, +0 == -0).
  function automatic logic fp_lt(input fp32_t a, input fp32_t b);
    logic a_zero, b_zero;
    a_zero = (a[30:0] == 31'd0);
    b_zero = (b[30:0] == 31'd0);
    if (a_zero && b_zero) return 1'b0;
    if (a[31] != b[31]) return a[31] && !(a_zero && b_zero);
    if (!a[31]) return a[30:0] < b[30:0];
    return a[30:0] > b[30:0];
  endfunction

endpackage

// gaurast_pe: one processing element of the enhanced rasterizer.
//
// Each PE owns PIX_PER_PE pixels of the tile and keeps their running result in
// local registers. Every cycle it can accept one (primitive, pixel slot) pair
// from the dispatch controller and apply the primitive to that pixel. The
// datapath is an 11-stage pipeline with one FP operation level per stage, so a
// new pair enters every cycle. The two modes share one pool of FP units; which
// operands reach a unit is chosen by a multiplexer on the running mode, and a
// unit that the current mode does not use gets zero operands (input gating).
//
//   Gaussian mode (3DGS alpha blending, front to back):
//     S1  d = P - mu                      (coordinate shift)
//     S2  dx*dx, dy*dy, dx*dy
//     S3  a*dx^2, c*dy^2, b*dx*dy
//     S4  t = a*dx^2 + c*dy^2
//     S5  h = -0.5 * t
//     S6  power = h - b*dx*dy
//     S7  g = exp(power)                  (Gaussian-only exponent unit)
//     S8  alpha = o * g                   (Gaussian probability)
//     S9  alpha*rgb, 1 - alpha            (colour weight)
//     S10 T*alpha*rgb, T*(1 - alpha)      (reads transmittance T)
//     S11 C += T*alpha*rgb, T <- T*(1 - alpha)   (colour accumulation)
//   Triangle mode (inside test, barycentrics, depth test):
//     S1  vertex - P for the three vertices, z1 - z0, z2 - z0
//     S2  six cross-product terms
//     S3  edge functions w0, w1, w2
//     S4  w0 + w1
//     S5  area = w0 + w1 + w2
//     S6  inv = 1 / area (triangle-only divider), inside test
//     S7  u = w1*inv, v = w2*inv          (UV weights)
//     S8  u*(z1 - z0), v*(z2 - z0)
//     S9  z0 + u*(z1 - z0)
//     S10 depth = ... + v*(z2 - z0)
//     S11 keep (u, v, depth) if inside and depth < held depth (min-depth hold)
//
// The four subtasks per mode, the nine-number inputs and three-number outputs,
// the shared-plus-dedicated structure, the mode multiplexers and the input
// gating follow the paper. The staging, the pixel ownership, the formulas
// for the edge functions and the unit count are this design's choices: the
// pool has 15 multipliers (10 used by both modes, 5 Gaussian-only), 15 adders
// (8 shared, 7 triangle-only), one exponent unit and one divider, because every
// operation gets its own unit at one pixel per cycle.
//
// Interface: pixel slot k of PE PE_ID is tile pixel p = k*NUM_PE + PE_ID, at
// x = tile_x + p % TILE_W, y = tile_y + p / TILE_W (integer pixel coordinates).
// `clear` resets all owned pixels (C = 0, T = 1; u = v = 0, depth = +inf) and
// must not be raised while `busy`. The running result of slot `rd_slot` is
// readable combinationally on `rd_pix`. Latency is 12 cycles from `in_valid`
// to the pixel state update (input buffer plus 11 stages). The transmittance read in S10 is written in S11,
// so the same slot must not be issued on two consecutive cycles.
// The assertions below use the asynchronous reset as their disable condition,
// which is why lint reports rst_n as used both synchronously and
// asynchronously; no logic samples rst_n synchronously.
module gaurast_pe
  import gaurast_pkg::*;
#(
  parameter int unsigned NUM_PE     = 16,
  parameter int unsigned PE_ID      = 0,
  parameter int unsigned TILE_W     = 16,
  parameter int unsigned PIX_PER_PE = 16,
  localparam int unsigned SW        = (PIX_PER_PE > 1) ? $clog2(PIX_PER_PE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  mode_e          mode,
  input  logic           clear,
  input  logic           in_valid,
  input  logic [SW-1:0]  in_slot,
  input  prim_t          in_prim,
  input  logic [15:0]    tile_x,
  input  logic [15:0]    tile_y,
  input  logic [SW-1:0]  rd_slot,
  output pix_t           rd_pix,
  output logic           busy
);

  localparam int unsigned NSTAGE = 11;
  localparam int unsigned NMUL   = 15;
  localparam int unsigned NADD   = 15;

  typedef struct packed {
    logic [SW-1:0]     slot;
    logic              hit;
    prim_t             prim;
    fp32_t [7:0]       v;
  } stg_t;

  // r[0] is the input buffer, r[k] the staging flip-flops after stage k
  stg_t r   [NSTAGE];
  stg_t nxt [NSTAGE];
  logic [NSTAGE-1:0] vld;

  // pixel state
  pix_t  st   [PIX_PER_PE];
  fp32_t st_t [PIX_PER_PE];

  // FP unit pool
  fp32_t mul_a [NMUL], mul_b [NMUL], mul_y [NMUL];
  fp32_t add_a [NADD], add_b [NADD], add_y [NADD];
  fp32_t exp_x, exp_y, div_a, div_b, div_y;

  for (genvar i = 0; i < NMUL; i++) begin : g_mul
    fp_mul u_mul (.a(mul_a[i]), .b(mul_b[i]), .y(mul_y[i]));
  end
  for (genvar i = 0; i < NADD; i++) begin : g_add
    fp_add u_add (.a(add_a[i]), .b(add_b[i]), .y(add_y[i]));
  end
  fp_exp u_exp (.x(exp_x), .y(exp_y));
  fp_div u_div (.a(div_a), .b(div_b), .y(div_y));

  // pixel coordinates of the incoming slot
  logic [31:0] pix_idx;
  logic [15:0] px_i, py_i;
  assign pix_idx = 32'(in_slot) * NUM_PE + PE_ID;
  assign px_i    = tile_x + 16'(pix_idx % TILE_W);
  assign py_i    = tile_y + 16'(pix_idx / TILE_W);

  // stage-11 signals
  logic  s11_we;
  pix_t  s11_pix;
  fp32_t s11_t;

  function automatic logic not_neg(input fp32_t v);
    return (v[30:0] == 31'd0) || !v[31];
  endfunction
  function automatic logic not_pos(input fp32_t v);
    return (v[30:0] == 31'd0) || v[31];
  endfunction

  // operand multiplexers of the FP unit pool (mode select and input gating)
  always_comb begin
    for (int i = 0; i < NMUL; i++) begin mul_a[i] = FP_ZERO; mul_b[i] = FP_ZERO; end
    for (int i = 0; i < NADD; i++) begin add_a[i] = FP_ZERO; add_b[i] = FP_ZERO; end
    exp_x = FP_ZERO;
    div_a = FP_ZERO;
    div_b = FP_ONE;

    if (mode == MODE_GAUSS) begin
      // S1 coordinate shift
      add_a[0] = r[0].v[0]; add_b[0] = fp_neg(r[0].prim[G_MUX]);
      add_a[1] = r[0].v[1]; add_b[1] = fp_neg(r[0].prim[G_MUY]);
      // S2 squares and cross term
      mul_a[0] = r[1].v[0]; mul_b[0] = r[1].v[0];
      mul_a[1] = r[1].v[1]; mul_b[1] = r[1].v[1];
      mul_a[2] = r[1].v[0]; mul_b[2] = r[1].v[1];
      // S3 conic products
      mul_a[3] = r[2].prim[G_CA]; mul_b[3] = r[2].v[0];
      mul_a[4] = r[2].prim[G_CC]; mul_b[4] = r[2].v[1];
      mul_a[5] = r[2].prim[G_CB]; mul_b[5] = r[2].v[2];
      // S4 t = a dx^2 + c dy^2
      add_a[2] = r[3].v[0]; add_b[2] = r[3].v[1];
      // S5 h = -t/2
      mul_a[6] = r[4].v[0]; mul_b[6] = FP_NEG_HALF;
      // S6 power = h - b dx dy
      add_a[3] = r[5].v[0]; add_b[3] = fp_neg(r[5].v[1]);
      // S7 exponent (Gaussian-only unit)
      exp_x = r[6].v[0];
      // S8 alpha = o * exp(power)
      mul_a[7] = r[7].prim[G_OPA]; mul_b[7] = r[7].v[0];
      // S9 colour weight: alpha*c and 1 - alpha
      mul_a[8]  = r[8].v[0]; mul_b[8]  = r[8].prim[G_R];
      mul_a[9]  = r[8].v[0]; mul_b[9]  = r[8].prim[G_G];
      mul_a[10] = r[8].v[0]; mul_b[10] = r[8].prim[G_B];
      add_a[4]  = FP_ONE;    add_b[4]  = fp_neg(r[8].v[0]);
      // S10 scale by transmittance
      mul_a[11] = st_t[r[9].slot]; mul_b[11] = r[9].v[0];
      mul_a[12] = st_t[r[9].slot]; mul_b[12] = r[9].v[1];
      mul_a[13] = st_t[r[9].slot]; mul_b[13] = r[9].v[2];
      mul_a[14] = st_t[r[9].slot]; mul_b[14] = r[9].v[3];
      // S11 colour accumulation
      for (int c = 0; c < 3; c++) begin add_a[5+c] = st[r[10].slot][c]; add_b[5+c] = r[10].v[c]; end
    end else begin
      // S1 coordinate shift: vertices relative to the pixel, depth deltas
      add_a[0] = r[0].prim[T_X0]; add_b[0] = fp_neg(r[0].v[0]);
      add_a[1] = r[0].prim[T_Y0]; add_b[1] = fp_neg(r[0].v[1]);
      add_a[2] = r[0].prim[T_X1]; add_b[2] = fp_neg(r[0].v[0]);
      add_a[3] = r[0].prim[T_Y1]; add_b[3] = fp_neg(r[0].v[1]);
      add_a[4] = r[0].prim[T_X2]; add_b[4] = fp_neg(r[0].v[0]);
      add_a[5] = r[0].prim[T_Y2]; add_b[5] = fp_neg(r[0].v[1]);
      add_a[6] = r[0].prim[T_Z1]; add_b[6] = fp_neg(r[0].prim[T_Z0]);
      add_a[7] = r[0].prim[T_Z2]; add_b[7] = fp_neg(r[0].prim[T_Z0]);
      // S2 cross-product terms (v0=ax v1=ay v2=bx v3=by v4=cx v5=cy)
      mul_a[0] = r[1].v[2]; mul_b[0] = r[1].v[5];  // bx*cy
      mul_a[1] = r[1].v[3]; mul_b[1] = r[1].v[4];  // by*cx
      mul_a[2] = r[1].v[4]; mul_b[2] = r[1].v[1];  // cx*ay
      mul_a[3] = r[1].v[5]; mul_b[3] = r[1].v[0];  // cy*ax
      mul_a[4] = r[1].v[0]; mul_b[4] = r[1].v[3];  // ax*by
      mul_a[5] = r[1].v[1]; mul_b[5] = r[1].v[2];  // ay*bx
      // S3 edge functions (triangle-only adders)
      add_a[8]  = r[2].v[0]; add_b[8]  = fp_neg(r[2].v[1]);
      add_a[9]  = r[2].v[2]; add_b[9]  = fp_neg(r[2].v[3]);
      add_a[10] = r[2].v[4]; add_b[10] = fp_neg(r[2].v[5]);
      // S4, S5 area
      add_a[11] = r[3].v[0]; add_b[11] = r[3].v[1];
      add_a[12] = r[4].v[3]; add_b[12] = r[4].v[2];
      // S6 reciprocal of the area (triangle-only divider) and inside test
      div_a = FP_ONE; div_b = r[5].v[3];
      // S7 UV weights
      mul_a[6] = r[6].v[1]; mul_b[6] = r[6].v[4];
      mul_a[7] = r[6].v[2]; mul_b[7] = r[6].v[4];
      // S8 depth interpolation products
      mul_a[8] = r[7].v[0]; mul_b[8] = r[7].v[6];
      mul_a[9] = r[7].v[1]; mul_b[9] = r[7].v[7];
      // S9, S10 depth sums
      add_a[13] = r[8].prim[T_Z0]; add_b[13] = r[8].v[2];
      add_a[14] = r[9].v[2]; add_b[14] = r[9].v[3];
    end
  end

  // staging-register inputs from the unit outputs
  always_comb begin
    nxt[0] = r[0];
    for (int k = 1; k < NSTAGE; k++) nxt[k] = r[k-1];
    s11_we  = 1'b0;
    s11_pix = st[r[NSTAGE-1].slot];
    s11_t   = st_t[r[NSTAGE-1].slot];

    if (mode == MODE_GAUSS) begin
      // S1 coordinate shift
      nxt[1].v[0] = add_y[0];
      nxt[1].v[1] = add_y[1];
      // S2 squares and cross term
      nxt[2].v[0] = mul_y[0];
      nxt[2].v[1] = mul_y[1];
      nxt[2].v[2] = mul_y[2];
      // S3 conic products
      nxt[3].v[0] = mul_y[3];
      nxt[3].v[1] = mul_y[4];
      nxt[3].v[2] = mul_y[5];
      // S4 t = a dx^2 + c dy^2
      nxt[4].v[0] = add_y[2];
      nxt[4].v[1] = r[3].v[2];
      // S5 h = -t/2
      nxt[5].v[0] = mul_y[6];
      // S6 power = h - b dx dy
      nxt[6].v[0] = add_y[3];
      // S7 exponent (Gaussian-only unit)
      nxt[7].v[0] = exp_y;
      // S8 alpha = o * exp(power)
      nxt[8].v[0] = mul_y[7];
      // S9 colour weight: alpha*c and 1 - alpha
      nxt[9].v[0] = mul_y[8];
      nxt[9].v[1] = mul_y[9];
      nxt[9].v[2] = mul_y[10];
      nxt[9].v[3] = add_y[4];
      // S10 scale by transmittance
      nxt[10].v[0] = mul_y[11];
      nxt[10].v[1] = mul_y[12];
      nxt[10].v[2] = mul_y[13];
      nxt[10].v[3] = mul_y[14];
      // S11 colour accumulation
      for (int c = 0; c < 3; c++) s11_pix[c] = add_y[5+c];
      s11_t  = r[10].v[3];
      s11_we = vld[10];
    end else begin
      // S1 coordinate shift: vertices relative to the pixel, depth deltas
      for (int i = 0; i < 8; i++) nxt[1].v[i] = add_y[i];
      // S2 cross-product terms (v0=ax v1=ay v2=bx v3=by v4=cx v5=cy)
      for (int i = 0; i < 6; i++) nxt[2].v[i] = mul_y[i];
      // S3 edge functions (triangle-only adders)
      nxt[3].v[0] = add_y[8];
      nxt[3].v[1] = add_y[9];
      nxt[3].v[2] = add_y[10];
      // S4, S5 area
      nxt[4].v[3] = add_y[11];
      nxt[5].v[3] = add_y[12];
      // S6 reciprocal of the area (triangle-only divider) and inside test
      nxt[6].v[4] = div_y;
      if (r[5].v[3][30:0] == 31'd0)
        nxt[6].hit = 1'b0;
      else if (!r[5].v[3][31])
        nxt[6].hit = not_neg(r[5].v[0]) && not_neg(r[5].v[1]) && not_neg(r[5].v[2]);
      else
        nxt[6].hit = not_pos(r[5].v[0]) && not_pos(r[5].v[1]) && not_pos(r[5].v[2]);
      // S7 UV weights
      nxt[7].v[0] = mul_y[6];
      nxt[7].v[1] = mul_y[7];
      // S8 depth interpolation products
      nxt[8].v[2] = mul_y[8];
      nxt[8].v[3] = mul_y[9];
      // S9, S10 depth sums
      nxt[9].v[2] = add_y[13];
      nxt[10].v[2] = add_y[14];
      // S11 min-depth hold
      s11_pix = {r[10].v[2], r[10].v[1], r[10].v[0]};
      s11_we  = vld[10] && r[10].hit && fp_lt(r[10].v[2], st[r[10].slot][2]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NSTAGE; k++) vld[k] <= 1'b0;
    end else begin
      vld[0] <= in_valid;
      for (int k = 1; k < NSTAGE; k++) vld[k] <= vld[k-1];
    end
  end

  always_ff @(posedge clk) begin
    r[0].slot   <= in_slot;
    r[0].prim   <= in_prim;
    r[0].hit    <= 1'b0;
    r[0].v      <= '0;
    r[0].v[0]   <= u16_to_fp32(px_i);
    r[0].v[1]   <= u16_to_fp32(py_i);
    for (int k = 1; k < NSTAGE; k++) begin
      r[k].slot   <= nxt[k].slot;
      r[k].prim   <= nxt[k].prim;
      r[k].hit    <= nxt[k].hit;
      r[k].v      <= nxt[k].v;
    end
  end

  always_ff @(posedge clk) begin
    if (clear) begin
      for (int i = 0; i < PIX_PER_PE; i++) begin
        st[i]   <= (mode == MODE_GAUSS) ? {FP_ZERO, FP_ZERO, FP_ZERO}
                                        : {FP_POS_INF, FP_ZERO, FP_ZERO};
        st_t[i] <= FP_ONE;
      end
    end else if (s11_we) begin
      st[r[NSTAGE-1].slot]   <= s11_pix;
      st_t[r[NSTAGE-1].slot] <= s11_t;
    end
  end

  assign rd_pix = st[rd_slot];

  always_comb begin
    busy = 1'b0;
    for (int k = 0; k < NSTAGE; k++) busy |= vld[k];
  end

  // the transmittance read in S10 is written in S11
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(vld[9] && vld[10] && r[9].slot == r[10].slot))
    else $error("same pixel slot issued on consecutive cycles");
  assert property (@(posedge clk) disable iff (!rst_n) !(clear && busy))
    else $error("clear while the pipeline is busy");

endmodule

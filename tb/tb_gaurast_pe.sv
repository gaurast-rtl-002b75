// tb_gaurast_pe: self-checking testbench for gaurast_pe.
//
// Instantiates PE 3 of a 16-PE block on a tile at (32, 48), so slot k is the
// pixel (35, 48 + k). Three phases:
//   1. latency: one Gaussian on one slot; the pixel state must change exactly
//      12 cycles after the pair is issued (input buffer plus 11 stages);
//   2. Gaussian mode: 12 random Gaussians are streamed over all 16 slots, one
//      pair per cycle with no gaps; every slot's RGB must match a double
//      precision model of front-to-back blending, C += T*alpha*c, T *= 1-alpha;
//   3. triangle mode: 12 random triangles with vertices on a quarter-pixel
//      grid (so the inside test is exact in both models); every slot's held
//      (u, v, depth) must match the nearest covering triangle, and uncovered
//      slots must keep depth = +inf.
// Input gating is checked throughout phases 2 and 3: in Gaussian mode the
// triangle-only divider must see the constant operands (0, 1), in triangle
// mode the Gaussian-only exponent unit must see 0, on every cycle that the
// pipeline holds work.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_gaurast_pe;
  import gaurast_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned NPIX = 16;
  localparam int unsigned NPRIM = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  mode_e mode = MODE_GAUSS;
  logic clear = 1'b0, in_valid = 1'b0;
  logic [3:0] in_slot = '0, rd_slot = '0;
  prim_t in_prim = '0;
  pix_t rd_pix;
  logic busy;
  int checks = 0, failures = 0, cycles = 0;

  gaurast_pe #(.NUM_PE(16), .PE_ID(3), .TILE_W(16), .PIX_PER_PE(NPIX)) dut (
    .clk, .rst_n, .mode, .clear, .in_valid, .in_slot, .in_prim,
    .tile_x(16'd32), .tile_y(16'd48), .rd_slot, .rd_pix, .busy);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input gating monitor
  int gate_g_cycles = 0, gate_t_cycles = 0, gate_bad = 0;
  always @(negedge clk) if (rst_n && busy) begin
    if (mode == MODE_GAUSS) begin
      gate_g_cycles++;
      if (dut.div_a != FP_ZERO || dut.div_b != FP_ONE) gate_bad++;
    end else begin
      gate_t_cycles++;
      if (dut.exp_x != FP_ZERO) gate_bad++;
    end
  end

  prim_t prims [NPRIM];
  real ref_c [NPIX][3];
  real ref_t [NPIX];

  function automatic real urand01();
    return real'($urandom % 1000000) / 1000000.0;
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  task automatic expect_close(input real got, input real exp_v, input real tol, input string what);
    checks++;
    if (fabs(got - exp_v) > tol) begin
      failures++;
      $display("MISMATCH %s: got %f expected %f", what, got, exp_v);
    end
  endtask

  task automatic do_clear();
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
  endtask

  task automatic stream(input int n);
    for (int i = 0; i < n; i++)
      for (int k = 0; k < NPIX; k++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_slot  = 4'(k);
        in_prim  = prims[i];
      end
    @(negedge clk) in_valid = 1'b0;
    wait (!busy);
    @(negedge clk);
  endtask

  initial begin
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. latency --------------------------------------------------------
    mode = MODE_GAUSS;
    do_clear();
    in_prim = '0;
    in_prim[G_MUX] = r2f(35.0); in_prim[G_MUY] = r2f(50.0);
    in_prim[G_CA] = r2f(0.5); in_prim[G_CC] = r2f(0.5);
    in_prim[G_OPA] = r2f(0.5); in_prim[G_R] = r2f(1.0);
    rd_slot = 4'd2;
    @(negedge clk) begin in_valid = 1'b1; in_slot = 4'd2; end
    @(negedge clk) in_valid = 1'b0;
    lat = 1;
    while (rd_pix[0] == FP_ZERO && lat < 40) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 12) begin failures++; $display("latency %0d, expected 12", lat); end
    expect_close(f2r(rd_pix[0]), 0.5, 1e-6, "latency-pixel red");

    // ---- 2. Gaussian mode ---------------------------------------------------
    for (int i = 0; i < NPRIM; i++) begin
      real a, c, b;
      a = 0.02 + 0.3 * urand01();
      c = 0.02 + 0.3 * urand01();
      b = (urand01() - 0.5) * 1.2 * $sqrt(a * c);
      prims[i] = '0;
      prims[i][G_MUX] = r2f(32.0 + 6.0 * urand01());
      prims[i][G_MUY] = r2f(46.0 + 20.0 * urand01());
      prims[i][G_CA]  = r2f(a);
      prims[i][G_CB]  = r2f(b);
      prims[i][G_CC]  = r2f(c);
      prims[i][G_OPA] = r2f(0.1 + 0.85 * urand01());
      prims[i][G_R]   = r2f(urand01());
      prims[i][G_G]   = r2f(urand01());
      prims[i][G_B]   = r2f(urand01());
    end
    for (int k = 0; k < NPIX; k++) begin
      ref_t[k] = 1.0;
      for (int c = 0; c < 3; c++) ref_c[k][c] = 0.0;
      for (int i = 0; i < NPRIM; i++) begin
        real dx, dy, pw, al;
        dx = 35.0 - f2r(prims[i][G_MUX]);
        dy = real'(48 + k) - f2r(prims[i][G_MUY]);
        pw = -0.5 * (f2r(prims[i][G_CA]) * dx * dx + f2r(prims[i][G_CC]) * dy * dy)
             - f2r(prims[i][G_CB]) * dx * dy;
        al = f2r(prims[i][G_OPA]) * $exp(pw);
        for (int c = 0; c < 3; c++) ref_c[k][c] += ref_t[k] * al * f2r(prims[i][G_R + c]);
        ref_t[k] = ref_t[k] * (1.0 - al);
      end
    end
    do_clear();
    stream(NPRIM);
    for (int k = 0; k < NPIX; k++) begin
      rd_slot = 4'(k);
      #1;
      for (int c = 0; c < 3; c++) expect_close(f2r(rd_pix[c]), ref_c[k][c], 1e-4, $sformatf("gauss slot %0d ch %0d", k, c));
      expect_close(f2r(dut.st_t[k]), ref_t[k], 1e-4, $sformatf("gauss slot %0d T", k));
    end

    // ---- 3. triangle mode ---------------------------------------------------
    mode = MODE_TRI;
    for (int i = 0; i < NPRIM; i++) begin
      prims[i] = '0;
      for (int v = 0; v < 3; v++) begin
        prims[i][3*v + 0] = r2f(real'(120 + ($urandom % 48)) / 4.0);   // x in [30, 42)
        prims[i][3*v + 1] = r2f(real'(180 + ($urandom % 96)) / 4.0);   // y in [45, 69)
        prims[i][3*v + 2] = r2f(1.0 + 9.0 * urand01());
      end
    end
    do_clear();
    stream(NPRIM);
    for (int k = 0; k < NPIX; k++) begin
      real best_d, best_u, best_v;
      logic hit_any;
      hit_any = 1'b0;
      best_d = 0.0; best_u = 0.0; best_v = 0.0;
      for (int i = 0; i < NPRIM; i++) begin
        real x0, y0, x1, y1, x2, y2, px, py, w0, w1, w2, ar, u, v, d;
        x0 = f2r(prims[i][T_X0]); y0 = f2r(prims[i][T_Y0]);
        x1 = f2r(prims[i][T_X1]); y1 = f2r(prims[i][T_Y1]);
        x2 = f2r(prims[i][T_X2]); y2 = f2r(prims[i][T_Y2]);
        px = 35.0; py = real'(48 + k);
        w0 = (x1 - px) * (y2 - py) - (y1 - py) * (x2 - px);
        w1 = (x2 - px) * (y0 - py) - (y2 - py) * (x0 - px);
        w2 = (x0 - px) * (y1 - py) - (y0 - py) * (x1 - px);
        ar = w0 + w1 + w2;
        if (ar != 0.0 && ((ar > 0.0 && w0 >= 0.0 && w1 >= 0.0 && w2 >= 0.0) ||
                          (ar < 0.0 && w0 <= 0.0 && w1 <= 0.0 && w2 <= 0.0))) begin
          u = w1 / ar; v = w2 / ar;
          d = f2r(prims[i][T_Z0]) + u * (f2r(prims[i][T_Z1]) - f2r(prims[i][T_Z0]))
                                  + v * (f2r(prims[i][T_Z2]) - f2r(prims[i][T_Z0]));
          if (!hit_any || d < best_d) begin
            best_d = d; best_u = u; best_v = v; hit_any = 1'b1;
          end
        end
      end
      rd_slot = 4'(k);
      #1;
      if (hit_any) begin
        expect_close(f2r(rd_pix[0]), best_u, 1e-4, $sformatf("tri slot %0d u", k));
        expect_close(f2r(rd_pix[1]), best_v, 1e-4, $sformatf("tri slot %0d v", k));
        expect_close(f2r(rd_pix[2]), best_d, 1e-4, $sformatf("tri slot %0d depth", k));
      end else begin
        checks++;
        if (rd_pix[2] != FP_POS_INF) begin
          failures++;
          $display("MISMATCH tri slot %0d: depth %h, expected +inf", k, rd_pix[2]);
        end
      end
    end

    $display("input gating: %0d Gaussian-mode and %0d triangle-mode busy cycles, %0d violations",
             gate_g_cycles, gate_t_cycles, gate_bad);
    checks += 2;
    if (gate_bad != 0) begin failures++; $display("a gated unit saw live operands"); end
    if (gate_g_cycles == 0 || gate_t_cycles == 0) begin failures++; $display("gating not exercised in both modes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

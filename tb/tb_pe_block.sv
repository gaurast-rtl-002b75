// tb_pe_block: self-checking testbench for pe_block with a small tile
// (NUM_PE = 4, PIX_PER_PE = 4, TILE_W = 4: a 4x4 tile; MAX_PRIMS = 16).
//
// The tile buffer is stood in for by the testbench (synchronous primitive
// read, pixel write). Gaussian mode: one tile at (8, 4) in two batches of 10
// and 6 Gaussians; the 16 collected pixels must match a double-precision
// blending model. Triangle mode: one batch of 16 triangles on tile (2, 2);
// collected (u, v, depth) must match the nearest covering triangle. The
// cycle count of each batch must stay within a fixed overhead of one
// (primitive, pixel) pair per PE per cycle: count * PIX_PER_PE cycles.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_pe_block;
  import gaurast_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  mode_e mode = MODE_GAUSS;
  logic start = 1'b0, first = 1'b0, last = 1'b0, done;
  logic [4:0] count = '0;
  logic [15:0] tile_x = '0, tile_y = '0;
  logic [3:0] prim_idx;
  prim_t prim_rdata;
  logic pix_we;
  logic [3:0] pix_idx;
  pix_t pix_wdata;
  int checks = 0, failures = 0, cycles = 0;

  pe_block #(.NUM_PE(4), .PIX_PER_PE(4), .TILE_W(4), .MAX_PRIMS(16)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  prim_t bufp [16];
  pix_t  bufx [16];
  int    nwrites = 0;
  always @(posedge clk) begin
    prim_rdata <= bufp[prim_idx];
    if (pix_we) begin bufx[pix_idx] <= pix_wdata; nwrites++; end
  end

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

  task automatic batch(input logic f, input logic l, input int n);
    int t0;
    @(negedge clk) begin start = 1'b1; first = f; last = l; count = 5'(n); end
    t0 = cycles;
    @(negedge clk) start = 1'b0;
    wait (done);
    @(negedge clk);
    checks++;
    if (cycles - t0 < n * 4 || cycles - t0 > n * 4 + 40) begin
      failures++;
      $display("batch of %0d took %0d cycles", n, cycles - t0);
    end
  endtask

  prim_t g [16];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // Gaussian tile (8,4), 10 + 6 primitives
    for (int i = 0; i < 16; i++) begin
      real a, c, b;
      a = 0.05 + 0.4 * urand01(); c = 0.05 + 0.4 * urand01();
      b = (urand01() - 0.5) * 1.2 * $sqrt(a * c);
      g[i] = '0;
      g[i][G_MUX] = r2f(7.0 + 6.0 * urand01()); g[i][G_MUY] = r2f(3.0 + 6.0 * urand01());
      g[i][G_CA] = r2f(a); g[i][G_CB] = r2f(b); g[i][G_CC] = r2f(c);
      g[i][G_OPA] = r2f(0.1 + 0.85 * urand01());
      g[i][G_R] = r2f(urand01()); g[i][G_G] = r2f(urand01()); g[i][G_B] = r2f(urand01());
    end
    mode = MODE_GAUSS; tile_x = 16'd8; tile_y = 16'd4;
    for (int i = 0; i < 10; i++) bufp[i] = g[i];
    batch(1'b1, 1'b0, 10);
    for (int i = 0; i < 6; i++) bufp[i] = g[10 + i];
    batch(1'b0, 1'b1, 6);
    checks++;
    if (nwrites != 16) begin failures++; $display("%0d pixel writes, expected 16", nwrites); end
    for (int p = 0; p < 16; p++) begin
      real col [3];
      real t;
      t = 1.0;
      for (int c = 0; c < 3; c++) col[c] = 0.0;
      for (int i = 0; i < 16; i++) begin
        real dx, dy, pw, al;
        dx = real'(8 + p % 4) - f2r(g[i][G_MUX]);
        dy = real'(4 + p / 4) - f2r(g[i][G_MUY]);
        pw = -0.5 * (f2r(g[i][G_CA]) * dx * dx + f2r(g[i][G_CC]) * dy * dy) - f2r(g[i][G_CB]) * dx * dy;
        al = f2r(g[i][G_OPA]) * $exp(pw);
        for (int c = 0; c < 3; c++) col[c] += t * al * f2r(g[i][G_R + c]);
        t = t * (1.0 - al);
      end
      for (int c = 0; c < 3; c++) expect_close(f2r(bufx[p][c]), col[c], 1e-4, $sformatf("gauss pixel %0d ch %0d", p, c));
    end

    // triangle tile (2,2), 16 triangles on a quarter-pixel grid
    mode = MODE_TRI; tile_x = 16'd2; tile_y = 16'd2;
    for (int i = 0; i < 16; i++)
      for (int v = 0; v < 3; v++) begin
        g[i][3*v + 0] = r2f(real'($urandom % 32) / 4.0);
        g[i][3*v + 1] = r2f(real'($urandom % 32) / 4.0);
        g[i][3*v + 2] = r2f(1.0 + 9.0 * urand01());
      end
    for (int i = 0; i < 16; i++) bufp[i] = g[i];
    batch(1'b1, 1'b1, 16);
    for (int p = 0; p < 16; p++) begin
      real bd, bu, bv, px, py;
      logic hit;
      hit = 1'b0; bd = 0.0; bu = 0.0; bv = 0.0;
      px = real'(2 + p % 4); py = real'(2 + p / 4);
      for (int i = 0; i < 16; i++) begin
        real w0, w1, w2, ar, u, v, d;
        w0 = (f2r(g[i][T_X1]) - px) * (f2r(g[i][T_Y2]) - py) - (f2r(g[i][T_Y1]) - py) * (f2r(g[i][T_X2]) - px);
        w1 = (f2r(g[i][T_X2]) - px) * (f2r(g[i][T_Y0]) - py) - (f2r(g[i][T_Y2]) - py) * (f2r(g[i][T_X0]) - px);
        w2 = (f2r(g[i][T_X0]) - px) * (f2r(g[i][T_Y1]) - py) - (f2r(g[i][T_Y0]) - py) * (f2r(g[i][T_X1]) - px);
        ar = w0 + w1 + w2;
        if (ar != 0.0 && ((ar > 0.0 && w0 >= 0.0 && w1 >= 0.0 && w2 >= 0.0) ||
                          (ar < 0.0 && w0 <= 0.0 && w1 <= 0.0 && w2 <= 0.0))) begin
          u = w1 / ar; v = w2 / ar;
          d = f2r(g[i][T_Z0]) + u * (f2r(g[i][T_Z1]) - f2r(g[i][T_Z0])) + v * (f2r(g[i][T_Z2]) - f2r(g[i][T_Z0]));
          if (!hit || d < bd) begin bd = d; bu = u; bv = v; hit = 1'b1; end
        end
      end
      if (hit) begin
        expect_close(f2r(bufx[p][0]), bu, 1e-4, $sformatf("tri pixel %0d u", p));
        expect_close(f2r(bufx[p][1]), bv, 1e-4, $sformatf("tri pixel %0d v", p));
        expect_close(f2r(bufx[p][2]), bd, 1e-4, $sformatf("tri pixel %0d depth", p));
      end else begin
        checks++;
        if (bufx[p][2] != FP_POS_INF) begin failures++; $display("tri pixel %0d depth not +inf", p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

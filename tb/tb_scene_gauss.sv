// tb_scene_gauss: renders a small 3D Gaussian Splatting frame on the
// rasterizer at its default size, as the shader cores would feed it.
//
// The testbench does the shader-core side of 3DGS for a 48x32-pixel image
// (six 16x16 tiles): it draws 1400 random projected Gaussians (centre, 2D
// covariance from two random axis lengths of 1.5 to 5 pixels and a random
// angle, depth, opacity, colour), inverts each covariance into the conic
// (a, b, c), takes the screen radius as 3 standard deviations of the major
// axis, bins every Gaussian to the tiles its radius touches, sorts by depth
// and splits each tile's list into batches of at most 1024 (one tile buffer).
// It then starts one run over all batches and checks every pixel of every
// tile against a double-precision model of front-to-back blending.
// Besides the pixels it checks:
//   - at least one tile needed more than one batch (state carried over);
//   - PE utilisation, primitive-pixel pairs / (16 * cycles), is above 0.64.
//     A primitive takes 16 cycles in the PEs and at least 9 bus cycles to
//     load, so without overlap utilisation could not exceed 16/25 = 0.64;
//     a higher value shows loads hidden behind computation.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_scene_gauss;
  import gaurast_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned IMG_W     = 48;
  localparam int unsigned IMG_H     = 32;
  localparam int unsigned TX        = IMG_W / 16;
  localparam int unsigned TY        = IMG_H / 16;
  localparam int unsigned NT        = TX * TY;
  localparam int unsigned NG        = 1400;
  localparam int unsigned BATCH     = 1024;
  localparam int unsigned DESC_BASE = 32'h0000;
  localparam int unsigned OUT_BASE  = 32'h0400;
  localparam int unsigned PRIM_BASE = 32'h2000;
  localparam int unsigned DEPTH     = 131072;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  mode_e mode = MODE_GAUSS;
  logic [15:0] num_batches = '0;
  logic [31:0] desc_base = '0;
  logic busy, done, overflow;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  int checks = 0, failures = 0, cycles = 0;

  gaurast_top dut (
    .clk, .rst_n, .start, .mode, .num_batches, .desc_base, .busy, .done, .overflow,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata);

  mem_model #(.DEPTH(DEPTH)) u_mem (
    .clk, .req_valid(mem_req_valid && rst_n), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  initial begin
    wait (cycles == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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
      if (failures < 20) $display("MISMATCH %s: got %f expected %f", what, got, exp_v);
    end
  endtask

  // the projected scene, as the preprocessing stage would leave it
  prim_t g     [NG];
  real   depth [NG];
  int    rad   [NG];
  int    order [NG];
  int    list  [NT][$];

  task automatic make_scene();
    for (int i = 0; i < NG; i++) begin
      real sx, sy, th, cs, sn, sxx, syy, sxy, det, mid, lmax;
      sx  = 1.5 + 3.5 * urand01();
      sy  = 1.5 + 3.5 * urand01();
      th  = 3.14159265 * urand01();
      cs  = $cos(th);
      sn  = $sin(th);
      sxx = cs * cs * sx * sx + sn * sn * sy * sy;
      syy = sn * sn * sx * sx + cs * cs * sy * sy;
      sxy = cs * sn * (sx * sx - sy * sy);
      det = sxx * syy - sxy * sxy;
      mid = 0.5 * (sxx + syy);
      lmax = mid + $sqrt(mid * mid - det > 0.1 ? mid * mid - det : 0.1);
      rad[i] = int'($ceil(3.0 * $sqrt(lmax)));
      g[i] = '0;
      g[i][G_MUX] = r2f(real'(IMG_W) * urand01());
      g[i][G_MUY] = r2f(real'(IMG_H) * urand01());
      g[i][G_CA]  = r2f(syy / det);
      g[i][G_CB]  = r2f(-sxy / det);
      g[i][G_CC]  = r2f(sxx / det);
      g[i][G_OPA] = r2f(0.05 + 0.55 * urand01());
      g[i][G_R]   = r2f(urand01());
      g[i][G_G]   = r2f(urand01());
      g[i][G_B]   = r2f(urand01());
      depth[i] = 1.0 + 99.0 * urand01();
    end
    // depth sort (insertion sort of indices, nearest first)
    for (int i = 0; i < NG; i++) begin
      int j;
      j = i;
      while (j > 0 && depth[order[j-1]] > depth[i]) begin
        order[j] = order[j-1];
        j--;
      end
      order[j] = i;
    end
    // tile binning by the bounding square of the radius
    for (int k = 0; k < NG; k++) begin
      int i, x0, x1, y0, y1;
      i  = order[k];
      x0 = int'($floor((f2r(g[i][G_MUX]) - real'(rad[i])) / 16.0));
      x1 = int'($floor((f2r(g[i][G_MUX]) + real'(rad[i])) / 16.0));
      y0 = int'($floor((f2r(g[i][G_MUY]) - real'(rad[i])) / 16.0));
      y1 = int'($floor((f2r(g[i][G_MUY]) + real'(rad[i])) / 16.0));
      for (int ty = (y0 < 0 ? 0 : y0); ty <= y1 && ty < int'(TY); ty++)
        for (int tx = (x0 < 0 ? 0 : x0); tx <= x1 && tx < int'(TX); tx++)
          list[ty * TX + tx].push_back(i);
    end
  endtask

  // lay the tile lists out in memory, one descriptor per batch
  int n_batches = 0, n_split_tiles = 0;
  longint pairs = 0;

  task automatic write_batches();
    int unsigned addr;
    addr = PRIM_BASE;
    for (int t = 0; t < int'(NT); t++) begin
      int n, done_n;
      n = list[t].size();
      pairs += longint'(n) * 256;
      if (n > int'(BATCH)) n_split_tiles++;
      done_n = 0;
      for (int i = 0; i < n; i++)
        for (int w = 0; w < PRIM_WORDS; w++)
          u_mem.mem[addr + 9*i + w] = g[list[t][i]][w];
      while (done_n < n || (n == 0 && done_n == 0)) begin
        int cnt;
        cnt = (n - done_n > int'(BATCH)) ? int'(BATCH) : n - done_n;
        u_mem.mem[DESC_BASE + 4*n_batches + 0] =
          {(done_n == 0), (done_n + cnt == n), 14'd0, 16'(cnt)};
        u_mem.mem[DESC_BASE + 4*n_batches + 1] = addr + 9*done_n;
        u_mem.mem[DESC_BASE + 4*n_batches + 2] = {16'((t / TX) * 16), 16'((t % TX) * 16)};
        u_mem.mem[DESC_BASE + 4*n_batches + 3] = OUT_BASE + 768*t;
        n_batches++;
        done_n += cnt;
        if (n == 0) break;
      end
      addr += 9 * n;
    end
  endtask

  task automatic check_tile(input int t);
    for (int p = 0; p < 256; p++) begin
      real col [3];
      real tr, px, py;
      px = real'((t % TX) * 16 + p % 16);
      py = real'((t / TX) * 16 + p / 16);
      tr = 1.0;
      for (int c = 0; c < 3; c++) col[c] = 0.0;
      foreach (list[t][k]) begin
        int i;
        real dx, dy, pw, al;
        i  = list[t][k];
        dx = px - f2r(g[i][G_MUX]);
        dy = py - f2r(g[i][G_MUY]);
        pw = -0.5 * (f2r(g[i][G_CA]) * dx * dx + f2r(g[i][G_CC]) * dy * dy)
             - f2r(g[i][G_CB]) * dx * dy;
        al = f2r(g[i][G_OPA]) * $exp(pw);
        for (int c = 0; c < 3; c++) col[c] += tr * al * f2r(g[i][G_R + c]);
        tr = tr * (1.0 - al);
      end
      for (int c = 0; c < 3; c++)
        expect_close(f2r(u_mem.mem[OUT_BASE + 768*t + 3*p + c]), col[c], 5e-4,
                     $sformatf("tile %0d pixel %0d ch %0d", t, p, c));
    end
  endtask

  initial begin
    int t0, dt;
    real util;
    for (int i = 0; i < int'(DEPTH); i++) u_mem.mem[i] = '0;
    make_scene();
    write_batches();
    for (int t = 0; t < int'(NT); t++) $display("tile %0d: %0d Gaussians", t, list[t].size());
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    @(negedge clk);
    mode = MODE_GAUSS; num_batches = 16'(n_batches); desc_base = DESC_BASE; start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cycles;
    wait (done);
    @(negedge clk);
    dt = cycles - t0;
    util = real'(pairs) / (16.0 * real'(dt));
    $display("%0d batches, %0d primitive-pixel pairs in %0d cycles, PE utilisation %f",
             n_batches, pairs, dt, util);

    for (int t = 0; t < int'(NT); t++) check_tile(t);
    checks += 3;
    if (overflow) begin failures++; $display("overflow flag set"); end
    if (n_split_tiles == 0) begin failures++; $display("no tile needed more than one batch"); end
    if (util <= 0.64) begin failures++; $display("PE utilisation not above 0.64"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_scene_tri: renders a small triangle-mesh frame on the rasterizer at its
// default size, to show that the triangle function still works end to end.
//
// The scene is a 48x32-pixel image (six 16x16 tiles) holding:
//   - a height-field mesh: a 12x8 grid of 4x4-pixel cells, each split into
//     two triangles, vertex depth 20 + 10*sin(x/7)*cos(y/5) plus noise. The
//     grid is offset by (0.25, 0.5) pixels so no pixel centre lies on a
//     mesh edge and every pixel is covered by exactly one mesh triangle;
//   - 40 random triangles of constant depth 5 to 15 in front of it, with
//     vertices on a quarter-pixel grid, overlapping each other.
// The testbench bins every triangle to the tiles its bounding box touches,
// writes one batch per tile, runs the rasterizer once and checks every
// pixel's (u, v, depth) against a double-precision model of the nearest
// covering triangle. Quarter-pixel vertices make the inside test exact in
// both models. A watchdog ends the run with a failure if it does not finish
// in time.
module tb_scene_tri;
  import gaurast_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned IMG_W     = 48;
  localparam int unsigned IMG_H     = 32;
  localparam int unsigned TX        = IMG_W / 16;
  localparam int unsigned TY        = IMG_H / 16;
  localparam int unsigned NT        = TX * TY;
  localparam int unsigned GX        = 12;
  localparam int unsigned GY        = 8;
  localparam int unsigned NMESH     = 2 * GX * GY;
  localparam int unsigned NOVER     = 40;
  localparam int unsigned NTRI      = NMESH + NOVER;
  localparam int unsigned DESC_BASE = 32'h0000;
  localparam int unsigned OUT_BASE  = 32'h0400;
  localparam int unsigned PRIM_BASE = 32'h2000;
  localparam int unsigned DEPTH     = 65536;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  mode_e mode = MODE_TRI;
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
    wait (cycles == 200000);
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

  prim_t tri_p [NTRI];
  int    list  [NT][$];
  real   hz    [GX + 1][GY + 1];

  function automatic prim_t mk(input real x0, input real y0, input real z0,
                               input real x1, input real y1, input real z1,
                               input real x2, input real y2, input real z2);
    prim_t p;
    p = '0;
    p[T_X0] = r2f(x0); p[T_Y0] = r2f(y0); p[T_Z0] = r2f(z0);
    p[T_X1] = r2f(x1); p[T_Y1] = r2f(y1); p[T_Z1] = r2f(z1);
    p[T_X2] = r2f(x2); p[T_Y2] = r2f(y2); p[T_Z2] = r2f(z2);
    return p;
  endfunction

  task automatic make_scene();
    int n;
    for (int i = 0; i <= int'(GX); i++)
      for (int j = 0; j <= int'(GY); j++)
        hz[i][j] = 20.0 + 10.0 * $sin(real'(4 * i) / 7.0) * $cos(real'(4 * j) / 5.0) + urand01();
    n = 0;
    for (int i = 0; i < int'(GX); i++)
      for (int j = 0; j < int'(GY); j++) begin
        real xa, xb, ya, yb;
        xa = 4.0 * real'(i) + 0.25; xb = xa + 4.0;
        ya = 4.0 * real'(j) + 0.5;  yb = ya + 4.0;
        if (i == 0) xa = -0.75;                       // cover column 0
        if (j == 0) ya = -0.5;                        // cover row 0
        tri_p[n++] = mk(xa, ya, hz[i][j], xb, ya, hz[i+1][j], xb, yb, hz[i+1][j+1]);
        tri_p[n++] = mk(xa, ya, hz[i][j], xb, yb, hz[i+1][j+1], xa, yb, hz[i][j+1]);
      end
    for (int k = 0; k < int'(NOVER); k++) begin
      real cx, cy, z;
      real x [3];
      real y [3];
      cx = real'($urandom % 48);
      cy = real'($urandom % 32);
      z  = 5.0 + 0.25 * real'(k);                     // distinct constant depths
      for (int v = 0; v < 3; v++) begin
        x[v] = cx + real'(int'($urandom % 49) - 24) / 4.0;
        y[v] = cy + real'(int'($urandom % 49) - 24) / 4.0;
      end
      tri_p[n++] = mk(x[0], y[0], z, x[1], y[1], z, x[2], y[2], z);
    end
    for (int i = 0; i < int'(NTRI); i++) begin
      real xmin, xmax, ymin, ymax;
      xmin = 1e9; xmax = -1e9; ymin = 1e9; ymax = -1e9;
      for (int v = 0; v < 3; v++) begin
        real xv, yv;
        xv = f2r(tri_p[i][3*v]); yv = f2r(tri_p[i][3*v + 1]);
        if (xv < xmin) xmin = xv;
        if (xv > xmax) xmax = xv;
        if (yv < ymin) ymin = yv;
        if (yv > ymax) ymax = yv;
      end
      for (int ty = 0; ty < int'(TY); ty++)
        for (int tx = 0; tx < int'(TX); tx++)
          if (xmax >= real'(16 * tx) && xmin <= real'(16 * tx + 15) &&
              ymax >= real'(16 * ty) && ymin <= real'(16 * ty + 15))
            list[ty * TX + tx].push_back(i);
    end
  endtask

  task automatic write_batches();
    int unsigned addr;
    addr = PRIM_BASE;
    for (int t = 0; t < int'(NT); t++) begin
      int n;
      n = list[t].size();
      for (int i = 0; i < n; i++)
        for (int w = 0; w < PRIM_WORDS; w++)
          u_mem.mem[addr + 9*i + w] = tri_p[list[t][i]][w];
      u_mem.mem[DESC_BASE + 4*t + 0] = {1'b1, 1'b1, 14'd0, 16'(n)};
      u_mem.mem[DESC_BASE + 4*t + 1] = addr;
      u_mem.mem[DESC_BASE + 4*t + 2] = {16'((t / TX) * 16), 16'((t % TX) * 16)};
      u_mem.mem[DESC_BASE + 4*t + 3] = OUT_BASE + 768*t;
      addr += 9 * n;
    end
  endtask

  int n_front = 0, n_mesh = 0, n_miss = 0;

  task automatic check_tile(input int t);
    for (int p = 0; p < 256; p++) begin
      real best_d, best_u, best_v, px, py;
      int best_i;
      best_i = -1;
      best_d = 0.0; best_u = 0.0; best_v = 0.0;
      px = real'((t % TX) * 16 + p % 16);
      py = real'((t / TX) * 16 + p / 16);
      foreach (list[t][k]) begin
        int i;
        real x0, y0, x1, y1, x2, y2, w0, w1, w2, ar, u, v, d;
        i  = list[t][k];
        x0 = f2r(tri_p[i][T_X0]); y0 = f2r(tri_p[i][T_Y0]);
        x1 = f2r(tri_p[i][T_X1]); y1 = f2r(tri_p[i][T_Y1]);
        x2 = f2r(tri_p[i][T_X2]); y2 = f2r(tri_p[i][T_Y2]);
        w0 = (x1 - px) * (y2 - py) - (y1 - py) * (x2 - px);
        w1 = (x2 - px) * (y0 - py) - (y2 - py) * (x0 - px);
        w2 = (x0 - px) * (y1 - py) - (y0 - py) * (x1 - px);
        ar = w0 + w1 + w2;
        if (ar != 0.0 && ((ar > 0.0 && w0 >= 0.0 && w1 >= 0.0 && w2 >= 0.0) ||
                          (ar < 0.0 && w0 <= 0.0 && w1 <= 0.0 && w2 <= 0.0))) begin
          u = w1 / ar; v = w2 / ar;
          d = f2r(tri_p[i][T_Z0]) + u * (f2r(tri_p[i][T_Z1]) - f2r(tri_p[i][T_Z0]))
                                  + v * (f2r(tri_p[i][T_Z2]) - f2r(tri_p[i][T_Z0]));
          if (best_i < 0 || d < best_d) begin
            best_d = d; best_u = u; best_v = v; best_i = i;
          end
        end
      end
      if (best_i < 0) n_miss++;
      else if (best_i >= int'(NMESH)) n_front++;
      else n_mesh++;
      if (best_i >= 0) begin
        expect_close(f2r(u_mem.mem[OUT_BASE + 768*t + 3*p + 0]), best_u, 1e-4, $sformatf("tile %0d pixel %0d u", t, p));
        expect_close(f2r(u_mem.mem[OUT_BASE + 768*t + 3*p + 1]), best_v, 1e-4, $sformatf("tile %0d pixel %0d v", t, p));
        expect_close(f2r(u_mem.mem[OUT_BASE + 768*t + 3*p + 2]), best_d, 1e-4, $sformatf("tile %0d pixel %0d depth", t, p));
      end
    end
  endtask

  initial begin
    int t0;
    for (int i = 0; i < int'(DEPTH); i++) u_mem.mem[i] = '0;
    make_scene();
    write_batches();
    for (int t = 0; t < int'(NT); t++) $display("tile %0d: %0d triangles", t, list[t].size());
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    @(negedge clk);
    mode = MODE_TRI; num_batches = 16'(NT); desc_base = DESC_BASE; start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cycles;
    wait (done);
    @(negedge clk);
    $display("%0d tiles in %0d cycles", NT, cycles - t0);

    for (int t = 0; t < int'(NT); t++) check_tile(t);
    $display("pixels: %0d from front triangles, %0d from the mesh, %0d uncovered", n_front, n_mesh, n_miss);
    checks += 3;
    if (n_miss != 0)  begin failures++; $display("mesh leaves pixels uncovered"); end
    if (n_front == 0) begin failures++; $display("no pixel won by a front triangle"); end
    if (n_mesh == 0)  begin failures++; $display("no pixel won by the mesh"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_gaurast_top: end-to-end testbench of the enhanced rasterizer at its
// default size (16 PEs, 16x16 tiles, 1024 primitives per tile buffer).
//
// The testbench plays the shader cores: it writes sorted primitives and batch
// descriptors into a memory model, starts the rasterizer and compares every
// pixel written back with a double-precision model.
//   Run 1, Gaussian mode, three batches: tile (0,0) split into two batches
//     (pixel state carried from the first to the last batch), then tile
//     (16,0) in one batch.
//   Run 2, triangle mode, one batch for tile (16,16) whose descriptor claims
//     1100 triangles: only the first 1024 fit a tile buffer, the overflow flag
//     must rise and the result must equal that of the first 1024 triangles.
// Mechanisms counted, each must occur at least once: ping-pong buffer swaps,
// a batch that continues a tile, memory traffic overlapping PE work, bus
// stalls, the overflow flag and the mode switch.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_gaurast_top;
  import gaurast_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned DESC_BASE = 32'h0000;
  localparam int unsigned PRIM_BASE = 32'h0100;
  localparam int unsigned OUT_BASE  = 32'h6000;
  localparam int unsigned TRI_N     = 1100;
  localparam int unsigned TRI_FIT   = 1024;

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

  mem_model #(.DEPTH(32768)) u_mem (
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

  // ---- mechanism counters ---------------------------------------------------
  int n_swap = 0, n_cont = 0, n_overlap = 0, n_stall = 0, n_overflow = 0, n_mode_switch = 0;
  logic sel_d = 1'b0;
  mode_e mode_d = MODE_TRI;
  always @(posedge clk) if (rst_n) begin
    sel_d  <= dut.sel;
    mode_d <= dut.run_mode;
    if (dut.sel != sel_d) n_swap++;
    if (dut.run_mode != mode_d && cycles > 10) n_mode_switch++;
    if (dut.pb_start && !dut.pb_first) n_cont++;
    if (mem_req_valid && mem_req_ready && dut.u_pes.u_dispatch.state != 3'd0) n_overlap++;
    if (mem_req_valid && !mem_req_ready) n_stall++;
  end

  // ---- helpers ----------------------------------------------------------------
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

  task automatic put_prim(input int unsigned addr, input prim_t p);
    for (int w = 0; w < PRIM_WORDS; w++) u_mem.mem[addr + w] = p[w];
  endtask

  task automatic put_desc(input int unsigned i, input logic first, input logic last,
                          input int unsigned count, input int unsigned prim_addr,
                          input int unsigned tx, input int unsigned ty, input int unsigned out_addr);
    u_mem.mem[DESC_BASE + 4*i + 0] = {first, last, 14'd0, 16'(count)};
    u_mem.mem[DESC_BASE + 4*i + 1] = prim_addr;
    u_mem.mem[DESC_BASE + 4*i + 2] = {16'(ty), 16'(tx)};
    u_mem.mem[DESC_BASE + 4*i + 3] = out_addr;
  endtask

  task automatic run(input mode_e m, input int unsigned nb);
    int t0;
    @(negedge clk);
    mode = m; num_batches = 16'(nb); desc_base = DESC_BASE; start = 1'b1;
    @(negedge clk) start = 1'b0;
    t0 = cycles;
    wait (done);
    @(negedge clk);
    $display("run in mode %0d: %0d batches in %0d cycles", m, nb, cycles - t0);
  endtask

  function automatic prim_t rand_gauss(input real cx, input real cy);
    prim_t p;
    real a, c, b;
    a = 0.01 + 0.2 * urand01();
    c = 0.01 + 0.2 * urand01();
    b = (urand01() - 0.5) * 1.2 * $sqrt(a * c);
    p = '0;
    p[G_MUX] = r2f(cx - 2.0 + 20.0 * urand01());
    p[G_MUY] = r2f(cy - 2.0 + 20.0 * urand01());
    p[G_CA] = r2f(a); p[G_CB] = r2f(b); p[G_CC] = r2f(c);
    p[G_OPA] = r2f(0.05 + 0.9 * urand01());
    p[G_R] = r2f(urand01()); p[G_G] = r2f(urand01()); p[G_B] = r2f(urand01());
    return p;
  endfunction

  // ---- Gaussian run -------------------------------------------------------------
  prim_t gp [60];
  prim_t tp [TRI_N];

  task automatic check_gauss_tile(input int first_i, input int n, input int tx, input int ty,
                                  input int unsigned out_addr);
    for (int p = 0; p < 256; p++) begin
      real col [3];
      real t;
      real px, py;
      px = real'(tx + p % 16);
      py = real'(ty + p / 16);
      t = 1.0;
      for (int c = 0; c < 3; c++) col[c] = 0.0;
      for (int i = first_i; i < first_i + n; i++) begin
        real dx, dy, pw, al;
        dx = px - f2r(gp[i][G_MUX]);
        dy = py - f2r(gp[i][G_MUY]);
        pw = -0.5 * (f2r(gp[i][G_CA]) * dx * dx + f2r(gp[i][G_CC]) * dy * dy)
             - f2r(gp[i][G_CB]) * dx * dy;
        al = f2r(gp[i][G_OPA]) * $exp(pw);
        for (int c = 0; c < 3; c++) col[c] += t * al * f2r(gp[i][G_R + c]);
        t = t * (1.0 - al);
      end
      for (int c = 0; c < 3; c++)
        expect_close(f2r(u_mem.mem[out_addr + 3*p + c]), col[c], 2e-4,
                     $sformatf("gauss tile (%0d,%0d) pixel %0d ch %0d", tx, ty, p, c));
    end
  endtask

  task automatic check_tri_tile(input int n, input int tx, input int ty, input int unsigned out_addr);
    for (int p = 0; p < 256; p++) begin
      real best_d, best_u, best_v, px, py;
      logic hit_any;
      hit_any = 1'b0;
      best_d = 0.0; best_u = 0.0; best_v = 0.0;
      px = real'(tx + p % 16);
      py = real'(ty + p / 16);
      for (int i = 0; i < n; i++) begin
        real x0, y0, x1, y1, x2, y2, w0, w1, w2, ar, u, v, d;
        x0 = f2r(tp[i][T_X0]); y0 = f2r(tp[i][T_Y0]);
        x1 = f2r(tp[i][T_X1]); y1 = f2r(tp[i][T_Y1]);
        x2 = f2r(tp[i][T_X2]); y2 = f2r(tp[i][T_Y2]);
        w0 = (x1 - px) * (y2 - py) - (y1 - py) * (x2 - px);
        w1 = (x2 - px) * (y0 - py) - (y2 - py) * (x0 - px);
        w2 = (x0 - px) * (y1 - py) - (y0 - py) * (x1 - px);
        ar = w0 + w1 + w2;
        if (ar != 0.0 && ((ar > 0.0 && w0 >= 0.0 && w1 >= 0.0 && w2 >= 0.0) ||
                          (ar < 0.0 && w0 <= 0.0 && w1 <= 0.0 && w2 <= 0.0))) begin
          u = w1 / ar; v = w2 / ar;
          d = f2r(tp[i][T_Z0]) + u * (f2r(tp[i][T_Z1]) - f2r(tp[i][T_Z0]))
                               + v * (f2r(tp[i][T_Z2]) - f2r(tp[i][T_Z0]));
          if (!hit_any || d < best_d) begin
            best_d = d; best_u = u; best_v = v; hit_any = 1'b1;
          end
        end
      end
      if (hit_any) begin
        expect_close(f2r(u_mem.mem[out_addr + 3*p + 0]), best_u, 1e-4, $sformatf("tri pixel %0d u", p));
        expect_close(f2r(u_mem.mem[out_addr + 3*p + 1]), best_v, 1e-4, $sformatf("tri pixel %0d v", p));
        expect_close(f2r(u_mem.mem[out_addr + 3*p + 2]), best_d, 1e-4, $sformatf("tri pixel %0d depth", p));
      end else begin
        checks++;
        if (u_mem.mem[out_addr + 3*p + 2] != FP_POS_INF) begin
          failures++;
          $display("MISMATCH tri pixel %0d: depth not +inf", p);
        end
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 32768; i++) u_mem.mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // Run 1: Gaussians. Tile (0,0): 20 + 15 primitives in two batches;
    // tile (16,0): 25 primitives in one batch.
    for (int i = 0; i < 35; i++) gp[i] = rand_gauss(0.0, 0.0);
    for (int i = 35; i < 60; i++) gp[i] = rand_gauss(16.0, 0.0);
    for (int i = 0; i < 60; i++) put_prim(PRIM_BASE + 9*i, gp[i]);
    put_desc(0, 1'b1, 1'b0, 20, PRIM_BASE,          0, 0, OUT_BASE);
    put_desc(1, 1'b0, 1'b1, 15, PRIM_BASE + 9*20,   0, 0, OUT_BASE);
    put_desc(2, 1'b1, 1'b1, 25, PRIM_BASE + 9*35,  16, 0, OUT_BASE + 768);
    run(MODE_GAUSS, 3);
    check_gauss_tile(0, 35, 0, 0, OUT_BASE);
    check_gauss_tile(35, 25, 16, 0, OUT_BASE + 768);
    checks++;
    if (overflow) begin failures++; $display("overflow flag set in run 1"); end

    // Run 2: triangles, one over-full batch on tile (16,16).
    for (int i = 0; i < TRI_N; i++) begin
      tp[i] = '0;
      for (int v = 0; v < 3; v++) begin
        tp[i][3*v + 0] = r2f(real'(48 + ($urandom % 96)) / 4.0);   // x in [12, 36)
        tp[i][3*v + 1] = r2f(real'(48 + ($urandom % 96)) / 4.0);   // y in [12, 36)
        tp[i][3*v + 2] = r2f(1.0 + 99.0 * urand01());
      end
      put_prim(PRIM_BASE + 9*i, tp[i]);
    end
    put_desc(0, 1'b1, 1'b1, TRI_N, PRIM_BASE, 16, 16, OUT_BASE + 1536);
    run(MODE_TRI, 1);
    check_tri_tile(TRI_FIT, 16, 16, OUT_BASE + 1536);
    checks++;
    if (!overflow) begin failures++; $display("overflow flag not set in run 2"); end
    else n_overflow++;

    $display("mechanisms: swaps=%0d continued_batches=%0d overlapped_requests=%0d bus_stalls=%0d overflow=%0d mode_switches=%0d",
             n_swap, n_cont, n_overlap, n_stall, n_overflow, n_mode_switch);
    checks += 6;
    if (n_swap == 0)        begin failures++; $display("no buffer swap"); end
    if (n_cont == 0)        begin failures++; $display("no continued batch"); end
    if (n_overlap == 0)     begin failures++; $display("no memory traffic during PE work"); end
    if (n_stall == 0)       begin failures++; $display("no bus stall"); end
    if (n_overflow == 0)    begin failures++; $display("no overflow"); end
    if (n_mode_switch == 0) begin failures++; $display("no mode switch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_top_controller: self-checking testbench for top_controller
// (MAX_PRIMS = 16) with the real memory interface and the memory model; the
// PE block is stood in for by a pulse of `pb_done` 3*count + 4 cycles after
// `pb_start`.
//
// Five batch descriptors are placed in memory: tile (0,0) in two batches,
// tile (16,0) in one, tile (32,0) in one with a count of 40 (more than a
// buffer holds), tile (48,0) in one. Checks: the PE block is started once per
// batch, in order, with the descriptor's first/last flags, tile origin and
// count (40 cut to 16, with `overflow` set); consecutive batches use
// alternate buffers; each tile's results are stored once, to its address,
// from the buffer its last batch ran in, after that batch finished; a
// primitive load overlaps PE work; `done` pulses once at the end.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_top_controller;
  import gaurast_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  mode_e mode_in = MODE_GAUSS;
  logic [15:0] num_batches = '0;
  logic [31:0] desc_base = '0;
  logic busy, done, overflow;
  mode_e mode;
  logic sel;
  logic pb_start, pb_first, pb_last, pb_done;
  logic [4:0] pb_count;
  logic [15:0] pb_tile_x, pb_tile_y;
  logic cmd_valid, cmd_ready, cmd_done;
  dma_op_e cmd_op;
  logic [31:0] cmd_addr;
  logic [4:0] cmd_count;
  logic desc_we;
  logic [1:0] desc_idx;
  logic [31:0] desc_data;
  logic prim_we;
  logic [3:0] prim_idx, prim_word;
  fp32_t prim_wdata;
  logic [7:0] pix_idx;
  logic [1:0] pix_word;
  fp32_t pix_rdata = '0;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  int checks = 0, failures = 0, cycles = 0;

  top_controller #(.MAX_PRIMS(16)) dut (.*);
  mem_interface #(.MAX_PRIMS(16), .TILE_PIX(256)) u_dma (.*);
  mem_model #(.DEPTH(8192), .LATENCY(5), .STALL_1_IN(4)) u_mem (
    .clk, .req_valid(mem_req_valid && rst_n), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 50000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // PE-block stand-in
  int pe_cnt = 0;
  always @(posedge clk) begin
    pb_done <= 1'b0;
    if (pb_start) pe_cnt <= 3 * int'(pb_count) + 4;
    else if (pe_cnt == 1) begin pe_cnt <= 0; pb_done <= 1'b1; end
    else if (pe_cnt != 0) pe_cnt <= pe_cnt - 1;
  end

  // expected batches
  typedef struct { logic f; logic l; int n; int tx; int out; } bd_t;
  bd_t bl [5];
  int n_start = 0, n_store = 0, n_done = 0, n_overlap = 0;
  logic last_sel;
  logic [31:0] store_addr [4];
  logic store_sel [4];
  logic tile_last_sel [4];
  int   tile_last_done [4];
  int   store_cycle [4];
  int   tiles_done = 0;

  always @(posedge clk) if (rst_n) begin
    if (pb_start) begin
      if (n_start < 5) begin
        chk(pb_first == bl[n_start].f && pb_last == bl[n_start].l, $sformatf("batch %0d flags", n_start));
        chk(int'(pb_count) == ((bl[n_start].n > 16) ? 16 : bl[n_start].n), $sformatf("batch %0d count", n_start));
        chk(int'(pb_tile_x) == bl[n_start].tx && pb_tile_y == 16'd0, $sformatf("batch %0d tile", n_start));
        if (n_start > 0) chk(sel != last_sel, $sformatf("batch %0d alternates buffers", n_start));
        last_sel = sel;
        if (bl[n_start].l) tile_last_sel[tiles_done] = sel;
      end
      n_start++;
    end
    if (pb_done && tiles_done < 4 && pb_last) begin
      tile_last_done[tiles_done] = cycles;
      tiles_done++;
    end
    if (cmd_valid && cmd_ready && cmd_op == DMA_STORE_PIX) begin
      if (n_store < 4) begin
        store_addr[n_store] = cmd_addr;
        store_sel[n_store] = !sel;
        store_cycle[n_store] = cycles;
      end
      n_store++;
    end
    if (cmd_valid && cmd_ready && cmd_op == DMA_LOAD_PRIM && pe_cnt != 0) n_overlap++;
    if (done) n_done++;
  end

  initial begin
    bl[0] = '{1'b1, 1'b0, 7, 0, 4000};
    bl[1] = '{1'b0, 1'b1, 5, 0, 4000};
    bl[2] = '{1'b1, 1'b1, 9, 16, 4800};
    bl[3] = '{1'b1, 1'b1, 40, 32, 5600};
    bl[4] = '{1'b1, 1'b1, 3, 48, 6400};
    for (int i = 0; i < 8192; i++) u_mem.mem[i] = '0;
    for (int i = 0; i < 5; i++) begin
      u_mem.mem[4*i + 0] = {bl[i].f, bl[i].l, 14'd0, 16'(bl[i].n)};
      u_mem.mem[4*i + 1] = 32'(100 + 400 * i);
      u_mem.mem[4*i + 2] = {16'd0, 16'(bl[i].tx)};
      u_mem.mem[4*i + 3] = 32'(bl[i].out);
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) begin start = 1'b1; num_batches = 16'd5; desc_base = '0; end
    @(negedge clk) start = 1'b0;
    wait (done);
    repeat (3) @(negedge clk);
    chk(n_start == 5, $sformatf("%0d PE-block starts", n_start));
    chk(n_store == 4, $sformatf("%0d stores", n_store));
    chk(n_done == 1, "one done pulse");
    chk(overflow, "overflow flag for the 40-primitive batch");
    chk(n_overlap > 0, "a load overlapped PE work");
    for (int t = 0; t < 4 && t < n_store; t++) begin
      chk(store_addr[t] == 32'(bl[t == 0 ? 1 : t + 1].out), $sformatf("tile %0d store address", t));
      chk(store_sel[t] == tile_last_sel[t], $sformatf("tile %0d stored from its buffer", t));
      chk(store_cycle[t] > tile_last_done[t], $sformatf("tile %0d stored after it finished", t));
    end
    chk(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mem_interface: self-checking testbench for mem_interface
// (MAX_PRIMS = 16, TILE_PIX = 16) against the memory model, whose ready
// signal drops at random.
//
// FETCH_DESC must deliver the four words at the given address, in order, on
// the descriptor port. LOAD_PRIM of 5 primitives must write each of the 45
// words to (primitive, word) = (i / 9, i % 9) of the tile buffer. STORE_PIX
// must copy the 16 x 3 pixel words of the (testbench-held) tile buffer to
// memory, pixel-major. A LOAD_PRIM of 0 primitives must finish at once.
// Every command must raise cmd_done exactly once, and the requester's hold
// rule is checked by the module's own assertion.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_mem_interface;
  import gaurast_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, cmd_done;
  dma_op_e cmd_op = DMA_FETCH_DESC;
  logic [31:0] cmd_addr = '0;
  logic [4:0] cmd_count = '0;
  logic desc_we;
  logic [1:0] desc_idx;
  fp32_t desc_data;
  logic prim_we;
  logic [3:0] prim_idx, prim_word;
  fp32_t prim_wdata;
  logic [3:0] pix_idx;
  logic [1:0] pix_word;
  fp32_t pix_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  int checks = 0, failures = 0, cycles = 0;

  mem_interface #(.MAX_PRIMS(16), .TILE_PIX(16)) dut (.*);
  mem_model #(.DEPTH(4096), .LATENCY(4), .STALL_1_IN(3)) u_mem (
    .clk, .req_valid(mem_req_valid && rst_n), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .rsp_valid(mem_rsp_valid), .rsp_rdata(mem_rsp_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tile-buffer stand-in
  fp32_t bprim [16][9];
  fp32_t bpix  [16][3];
  always @(posedge clk) begin
    if (prim_we) bprim[prim_idx][prim_word] <= prim_wdata;
    pix_rdata <= bpix[pix_idx][pix_word];
  end
  fp32_t desc_got [4];
  int desc_n = 0, done_n = 0;
  always @(posedge clk) begin
    if (desc_we) begin desc_got[desc_idx] <= desc_data; desc_n++; end
    if (cmd_done) done_n++;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic command(input dma_op_e op, input int unsigned addr, input int unsigned n);
    int d0;
    d0 = done_n;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_addr = addr; cmd_count = 5'(n);
    @(negedge clk) cmd_valid = 1'b0;
    while (done_n == d0) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(done_n == d0 + 1, "one done pulse per command");
  endtask

  initial begin
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = 32'hDEAD_0000 + i;
    for (int i = 0; i < 16; i++) for (int w = 0; w < 3; w++) bpix[i][w] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    command(DMA_FETCH_DESC, 100, 0);
    chk(desc_n == 4, "four descriptor words");
    for (int i = 0; i < 4; i++) chk(desc_got[i] == 32'hDEAD_0000 + 100 + i, $sformatf("descriptor word %0d", i));

    command(DMA_LOAD_PRIM, 500, 5);
    for (int i = 0; i < 45; i++)
      chk(bprim[i / 9][i % 9] == 32'hDEAD_0000 + 500 + i, $sformatf("primitive word %0d", i));

    command(DMA_STORE_PIX, 2000, 0);
    for (int i = 0; i < 48; i++)
      chk(u_mem.mem[2000 + i] == bpix[i / 3][i % 3], $sformatf("pixel word %0d", i));
    chk(u_mem.mem[2048] == 32'hDEAD_0000 + 2048, "no write past the tile");

    command(DMA_LOAD_PRIM, 700, 0);
    chk(u_mem.stalls > 0, "bus stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

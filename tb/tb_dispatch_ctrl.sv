// tb_dispatch_ctrl: self-checking testbench for dispatch_ctrl
// (MAX_PRIMS = 16, PIX_PER_PE = 4).
//
// The PEs are stood in for by a busy signal that stays high for 7 cycles
// after the last issued pair; the result collector by a done pulse 5 cycles
// after its start. Three batches are run: (first, 3 primitives), (middle,
// 2 primitives), (last, 0 primitives). For each it checks the clear pulse
// (first batch only), that the pairs come out as (0,0) (0,1) .. (n-1,3) on
// back-to-back cycles, that the primitive index led the pair by one cycle
// (buffer read latency), that the collector is started only after the last
// batch and only once the PEs are idle, and the cycle count from start to
// done.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_dispatch_ctrl;
  localparam int unsigned PIX = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0, first = 1'b0, last = 1'b0;
  logic [4:0] count = '0;
  logic done, pe_clear, pe_valid, coll_start, coll_done;
  logic [3:0] prim_idx;
  logic [1:0] pe_slot;
  logic pe_busy;
  int checks = 0, failures = 0, cycles = 0;

  dispatch_ctrl #(.MAX_PRIMS(16), .PIX_PER_PE(PIX)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // PE and collector stand-ins
  int busy_cnt = 0, coll_cnt = 0;
  logic [3:0] idx_d;
  assign pe_busy = (busy_cnt != 0);
  always @(posedge clk) begin
    idx_d <= prim_idx;
    if (pe_valid) busy_cnt <= 7; else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
    coll_done <= 1'b0;
    if (coll_start) coll_cnt <= 5;
    else if (coll_cnt == 1) begin coll_cnt <= 0; coll_done <= 1'b1; end
    else if (coll_cnt != 0) coll_cnt <= coll_cnt - 1;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitors, sampled just before each rising edge
  int pairs, clears, colls, last_valid, busy_at_coll, tdone;
  logic gap;
  always @(negedge clk) begin
    if (pe_clear) clears++;
    if (coll_start) begin colls++; busy_at_coll = busy_cnt; end
    if (done) tdone = cycles;
    if (pe_valid) begin
      chk(pe_slot == 2'(pairs % PIX), "slot order");
      chk(idx_d == 4'(pairs / PIX), "primitive index one cycle ahead");
      if (last_valid >= 0 && last_valid != cycles - 1) gap = 1'b1;
      last_valid = cycles;
      pairs++;
    end
  end

  task automatic batch(input logic f, input logic l, input int n);
    int t0;
    pairs = 0; clears = 0; colls = 0; gap = 1'b0; last_valid = -1; busy_at_coll = 0; tdone = -1;
    @(negedge clk) begin start = 1'b1; first = f; last = l; count = 5'(n); end
    t0 = cycles;
    @(negedge clk) start = 1'b0;
    while (tdone < 0) @(negedge clk);
    @(negedge clk);
    chk(pairs == n * PIX, $sformatf("issued %0d pairs, expected %0d", pairs, n * PIX));
    chk(!gap, "pairs issued back to back");
    chk(clears == (f ? 1 : 0), "clear pulse only on the first batch");
    chk(colls == (l ? 1 : 0), "collector started only after the last batch");
    chk(busy_at_coll == 0, "collector started only with idle PEs");
    // start is seen one cycle after it is raised; issue + drain + collection
    chk(tdone - t0 <= 1 + (f ? 1 : 0) + n * PIX + 1 + 8 + (l ? 7 : 0) + 2,
        $sformatf("batch took %0d cycles", tdone - t0));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    batch(1'b1, 1'b0, 3);
    batch(1'b0, 1'b0, 2);
    batch(1'b0, 1'b1, 0);
    batch(1'b1, 1'b1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_result_collector: self-checking testbench for result_collector
// (NUM_PE = 4, PIX_PER_PE = 4).
//
// Each stand-in PE returns, for the broadcast slot, a pixel whose words encode
// (PE, slot, word). The testbench checks that pixel p of the tile is written
// to buffer entry p with the data of PE p % 4, slot p / 4, one pixel per
// cycle in raster order, that exactly 16 writes happen, and that `done`
// pulses one cycle after the last write.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_result_collector;
  import gaurast_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [1:0] rd_slot;
  pix_t pe_pix [4];
  logic buf_we;
  logic [3:0] buf_idx;
  pix_t buf_wdata;
  int checks = 0, failures = 0, cycles = 0;

  result_collector #(.NUM_PE(4), .PIX_PER_PE(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 2000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb
    for (int i = 0; i < 4; i++)
      for (int w = 0; w < 3; w++) pe_pix[i][w] = {8'hC0, 8'(i), 8'(rd_slot), 8'(w)};

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int n, t_last;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      n = 0;
      t_last = 0;
      while (!done) begin
        #1;
        if (buf_we) begin
          chk(buf_idx == 4'(n), "raster order");
          for (int w = 0; w < 3; w++)
            chk(buf_wdata[w] == {8'hC0, 8'(n % 4), 8'(n / 4), 8'(w)}, $sformatf("pixel %0d word %0d", n, w));
          n++;
          t_last = cycles;
        end
        @(posedge clk); #1;
      end
      chk(n == 16, $sformatf("%0d writes", n));
      chk(cycles == t_last + 1, "done one cycle after the last write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tile_buffer: self-checking testbench for tile_buffer (64 primitives).
//
// Writes random primitives word by word through the memory-side port and
// reads each back whole through the PE-side port one cycle later; writes
// random pixels whole through the collector port and reads them back word by
// word through the memory-side port. Also checks the one-cycle read latency
// (data does not change before the clock edge).
// A watchdog ends the run with a failure if it does not finish in time.
module tb_tile_buffer;
  import gaurast_pkg::*;

  localparam int unsigned NP = 64, NX = 256;
  logic clk = 1'b0;
  logic m_prim_we = 1'b0;
  logic [5:0] m_prim_idx = '0, p_prim_idx = '0;
  logic [3:0] m_prim_word = '0;
  fp32_t m_prim_wdata = '0, m_pix_rdata;
  logic [7:0] m_pix_idx = '0, p_pix_idx = '0;
  logic [1:0] m_pix_word = '0;
  prim_t p_prim_rdata;
  logic p_pix_we = 1'b0;
  pix_t p_pix_wdata = '0;
  int checks = 0, failures = 0, cycles = 0;

  tile_buffer #(.MAX_PRIMS(NP), .TILE_PIX(NX)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  prim_t prims [NP];
  pix_t  pixs  [NX];

  initial begin
    for (int i = 0; i < NP; i++) for (int w = 0; w < 9; w++) prims[i][w] = $urandom;
    for (int i = 0; i < NX; i++) for (int w = 0; w < 3; w++) pixs[i][w] = $urandom;
    // memory side writes primitives word by word, in random word order
    for (int i = 0; i < NP; i++)
      for (int w = 8; w >= 0; w--) begin
        @(negedge clk);
        m_prim_we = 1'b1; m_prim_idx = 6'(i); m_prim_word = 4'(w); m_prim_wdata = prims[i][w];
      end
    @(negedge clk) m_prim_we = 1'b0;
    // PE side reads whole primitives
    for (int i = NP - 1; i >= 0; i--) begin
      @(negedge clk) p_prim_idx = 6'(i);
      #1;
      if (i != NP - 1) begin
        checks++;
        if (p_prim_rdata != prims[i + 1]) begin failures++; $display("read latency: data changed before the edge"); end
      end
      @(posedge clk); #1;
      checks++;
      if (p_prim_rdata != prims[i]) begin failures++; $display("prim %0d mismatch", i); end
    end
    // collector writes pixels, memory side reads words
    for (int i = 0; i < NX; i++) begin
      @(negedge clk) begin p_pix_we = 1'b1; p_pix_idx = 8'(i); p_pix_wdata = pixs[i]; end
    end
    @(negedge clk) p_pix_we = 1'b0;
    for (int i = 0; i < NX; i++)
      for (int w = 0; w < 3; w++) begin
        @(negedge clk) begin m_pix_idx = 8'(i); m_pix_word = 2'(w); end
        @(posedge clk); #1;
        checks++;
        if (m_pix_rdata != pixs[i][w]) begin failures++; $display("pixel %0d word %0d mismatch", i, w); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

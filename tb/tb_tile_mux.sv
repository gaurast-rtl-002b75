// tb_tile_mux: self-checking testbench for tile_mux.
//
// Both buffers are stood in for by the testbench, which returns a different
// primitive and pixel word from A and B. For both values of `sel` it checks
// that the PE side reads the selected buffer and the memory side the other
// one (one cycle after `sel` changes, matching the buffers' read latency),
// that write enables reach only the right buffer, and that addresses and
// write data are passed to both.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_tile_mux;
  import gaurast_pkg::*;

  logic clk = 1'b0, sel = 1'b0;
  logic [9:0] p_prim_idx = '0, m_prim_idx = '0;
  prim_t p_prim_rdata;
  logic p_pix_we = 1'b0, m_prim_we = 1'b0;
  logic [7:0] p_pix_idx = '0, m_pix_idx = '0;
  pix_t p_pix_wdata = '0;
  logic [3:0] m_prim_word = '0;
  fp32_t m_prim_wdata = '0, m_pix_rdata;
  logic [1:0] m_pix_word = '0;
  logic [9:0] b_p_prim_idx [2];
  prim_t b_p_prim_rdata [2];
  logic b_p_pix_we [2];
  logic [7:0] b_p_pix_idx [2];
  pix_t b_p_pix_wdata [2];
  logic b_m_prim_we [2];
  logic [9:0] b_m_prim_idx [2];
  logic [3:0] b_m_prim_word [2];
  fp32_t b_m_prim_wdata [2];
  logic [7:0] b_m_pix_idx [2];
  logic [1:0] b_m_pix_word [2];
  fp32_t b_m_pix_rdata [2];
  int checks = 0, failures = 0, cycles = 0;

  tile_mux dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;
  initial begin
    wait (cycles == 2000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int w = 0; w < 9; w++) begin
      b_p_prim_rdata[0][w] = 32'hA000_0000 + w;
      b_p_prim_rdata[1][w] = 32'hB000_0000 + w;
    end
    b_m_pix_rdata[0] = 32'hA1A1_A1A1;
    b_m_pix_rdata[1] = 32'hB1B1_B1B1;
    for (int rep = 0; rep < 8; rep++) begin
      logic s;
      s = 1'(rep);
      @(negedge clk) sel = s;
      p_pix_we = 1'b1; m_prim_we = 1'b1;
      p_prim_idx = 10'($urandom); m_prim_idx = 10'($urandom); p_pix_idx = 8'($urandom);
      m_pix_idx = 8'($urandom); m_prim_word = 4'($urandom % 9); m_pix_word = 2'($urandom % 3);
      m_prim_wdata = $urandom; p_pix_wdata = {$urandom, $urandom, $urandom};
      #1;
      chk(b_p_pix_we[s] && !b_p_pix_we[!s], "pixel write enable steering");
      chk(b_m_prim_we[!s] && !b_m_prim_we[s], "primitive write enable steering");
      for (int b = 0; b < 2; b++) begin
        chk(b_p_prim_idx[b] == p_prim_idx && b_p_pix_idx[b] == p_pix_idx && b_p_pix_wdata[b] == p_pix_wdata,
            "PE-side address/data fan-out");
        chk(b_m_prim_idx[b] == m_prim_idx && b_m_prim_word[b] == m_prim_word &&
            b_m_prim_wdata[b] == m_prim_wdata && b_m_pix_idx[b] == m_pix_idx && b_m_pix_word[b] == m_pix_word,
            "memory-side address/data fan-out");
      end
      @(posedge clk); #1;
      chk(p_prim_rdata == b_p_prim_rdata[s], "PE side reads the selected buffer");
      chk(m_pix_rdata == b_m_pix_rdata[!s], "memory side reads the other buffer");
    end
    @(negedge clk) begin p_pix_we = 1'b0; m_prim_we = 1'b0; end
    #1;
    chk(!b_p_pix_we[0] && !b_p_pix_we[1] && !b_m_prim_we[0] && !b_m_prim_we[1], "no write without enable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

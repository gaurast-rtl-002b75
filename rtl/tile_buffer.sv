// tile_buffer: one of the two ping-pong tile buffers (A and B).
//
// Holds the primitives of one batch and the pixel results of one tile. The
// paper says the buffers store primitives and pixel data and alternate; the
// organisation below is this design's choice. The primitive store is
// MAX_PRIMS entries of nine FP32 words: the memory interface writes it one
// word at a time, the dispatch controller reads a whole primitive per cycle.
// The pixel store is TILE_PIX entries of three FP32 words: the result
// collector writes a whole pixel per cycle, the memory interface reads it one
// word at a time. Both reads are synchronous (data one cycle after the
// address), as in an SRAM macro; writes take effect at the clock edge.
module tile_buffer
  import gaurast_pkg::*;
#(
  parameter int unsigned MAX_PRIMS = 1024,
  parameter int unsigned TILE_PIX  = 256,
  localparam int unsigned PW = $clog2(MAX_PRIMS),
  localparam int unsigned XW = $clog2(TILE_PIX)
) (
  input  logic          clk,
  // memory-interface side
  input  logic          m_prim_we,
  input  logic [PW-1:0] m_prim_idx,
  input  logic [3:0]    m_prim_word,
  input  fp32_t         m_prim_wdata,
  input  logic [XW-1:0] m_pix_idx,
  input  logic [1:0]    m_pix_word,
  output fp32_t         m_pix_rdata,
  // PE-block side
  input  logic [PW-1:0] p_prim_idx,
  output prim_t         p_prim_rdata,
  input  logic          p_pix_we,
  input  logic [XW-1:0] p_pix_idx,
  input  pix_t          p_pix_wdata
);

  fp32_t prim_mem [PRIM_WORDS][MAX_PRIMS];
  pix_t  pix_mem  [TILE_PIX];

  for (genvar w = 0; w < PRIM_WORDS; w++) begin : g_bank
    always_ff @(posedge clk) begin
      if (m_prim_we && m_prim_word == 4'(w)) prim_mem[w][m_prim_idx] <= m_prim_wdata;
      p_prim_rdata[w] <= prim_mem[w][p_prim_idx];
    end
  end

  always_ff @(posedge clk) begin
    if (p_pix_we) pix_mem[p_pix_idx] <= p_pix_wdata;
    m_pix_rdata <= pix_mem[m_pix_idx][m_pix_word];
  end

endmodule

// tile_mux: ping-pong steering between tile buffers A and B.
//
// `sel` names the buffer the PE block works on (0 = A, 1 = B); the memory
// interface is connected to the other one at the same time. The PE block's
// primitive read data comes from the selected buffer (the MUX drawn between
// the buffers and the PE block in the paper's block diagram); its pixel writes
// go only to the selected buffer; the memory interface's primitive writes go
// only to the other buffer and its pixel read data comes from that buffer.
// Because the read data of a buffer lags its address by one cycle, `sel` is
// registered once for the read-data multiplexers; the controller changes
// `sel` only between batches. Combinational except for that register.
// Addresses and write data go to both buffers unchanged and only the write
// enables are steered, so most buffer-side outputs are plain wires from the
// inputs; this is intended and keeps the multiplexing off the wide data paths.
module tile_mux
  import gaurast_pkg::*;
#(
  parameter int unsigned MAX_PRIMS = 1024,
  parameter int unsigned TILE_PIX  = 256,
  localparam int unsigned PW = $clog2(MAX_PRIMS),
  localparam int unsigned XW = $clog2(TILE_PIX)
) (
  input  logic          clk,
  input  logic          sel,
  // PE-block side
  input  logic [PW-1:0] p_prim_idx,
  output prim_t         p_prim_rdata,
  input  logic          p_pix_we,
  input  logic [XW-1:0] p_pix_idx,
  input  pix_t          p_pix_wdata,
  // memory-interface side
  input  logic          m_prim_we,
  input  logic [PW-1:0] m_prim_idx,
  input  logic [3:0]    m_prim_word,
  input  fp32_t         m_prim_wdata,
  input  logic [XW-1:0] m_pix_idx,
  input  logic [1:0]    m_pix_word,
  output fp32_t         m_pix_rdata,
  // buffer ports, index 0 = A, 1 = B
  output logic [PW-1:0] b_p_prim_idx   [2],
  input  prim_t         b_p_prim_rdata [2],
  output logic          b_p_pix_we     [2],
  output logic [XW-1:0] b_p_pix_idx    [2],
  output pix_t          b_p_pix_wdata  [2],
  output logic          b_m_prim_we    [2],
  output logic [PW-1:0] b_m_prim_idx   [2],
  output logic [3:0]    b_m_prim_word  [2],
  output fp32_t         b_m_prim_wdata [2],
  output logic [XW-1:0] b_m_pix_idx    [2],
  output logic [1:0]    b_m_pix_word   [2],
  input  fp32_t         b_m_pix_rdata  [2]
);

  logic sel_q;

  always_ff @(posedge clk) sel_q <= sel;

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      b_p_prim_idx[b]   = p_prim_idx;
      b_p_pix_idx[b]    = p_pix_idx;
      b_p_pix_wdata[b]  = p_pix_wdata;
      b_p_pix_we[b]     = p_pix_we && (sel == 1'(b));
      b_m_prim_idx[b]   = m_prim_idx;
      b_m_prim_word[b]  = m_prim_word;
      b_m_prim_wdata[b] = m_prim_wdata;
      b_m_prim_we[b]    = m_prim_we && (sel != 1'(b));
      b_m_pix_idx[b]    = m_pix_idx;
      b_m_pix_word[b]   = m_pix_word;
    end
    p_prim_rdata = b_p_prim_rdata[sel_q];
    m_pix_rdata  = b_m_pix_rdata[!sel_q];
  end

endmodule

// gaurast_top: the enhanced rasterizer of one graphics processing cluster.
//
// It renders either triangles or 3D Gaussian splats (already projected to
// 2D and depth-sorted by the shader cores) tile by tile. The top controller
// reads batch descriptors from memory, the memory interface loads each batch
// of primitives into whichever of tile buffers A and B the PE block is not
// using, the MUX feeds the other buffer to the PE block, and the PE block's
// 16 PEs apply every primitive to every pixel of the tile. Finished tiles are
// written back to memory as three FP32 words per pixel: RGB in Gaussian mode,
// (u, v, depth) of the nearest triangle in triangle mode.
//
// Interface: a command (`start` with `mode`, `num_batches`, `desc_base`;
// see top_controller for the descriptor format), status (`busy`, a `done`
// pulse, the sticky `overflow` flag), and a 32-bit word-addressed memory bus
// (see mem_interface). The block structure (top controller, tile buffers A
// and B, MUX, PE block with dispatch controller, PEs and result collector,
// cache/memory interface) and the 16 PEs follow the paper; buffer sizes,
// tile size and the bus are this design's choices.
module gaurast_top
  import gaurast_pkg::*;
#(
  parameter int unsigned NUM_PE     = 16,
  parameter int unsigned PIX_PER_PE = 16,
  parameter int unsigned TILE_W     = 16,
  parameter int unsigned MAX_PRIMS  = 1024,
  localparam int unsigned TILE_PIX  = NUM_PE * PIX_PER_PE,
  localparam int unsigned PW = $clog2(MAX_PRIMS),
  localparam int unsigned CW = $clog2(MAX_PRIMS + 1),
  localparam int unsigned XW = $clog2(TILE_PIX)
) (
  input  logic        clk,
  input  logic        rst_n,
  // command and status
  input  logic        start,
  input  mode_e       mode,
  input  logic [15:0] num_batches,
  input  logic [31:0] desc_base,
  output logic        busy,
  output logic        done,
  output logic        overflow,
  // memory bus
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic [31:0] mem_req_addr,
  output logic [31:0] mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  logic [31:0] mem_rsp_rdata
);

  mode_e         run_mode;
  logic          sel;
  logic          pb_start, pb_first, pb_last, pb_done;
  logic [CW-1:0] pb_count;
  logic [15:0]   pb_tile_x, pb_tile_y;
  logic          cmd_valid, cmd_ready, cmd_done;
  dma_op_e       cmd_op;
  logic [31:0]   cmd_addr;
  logic [CW-1:0] cmd_count;
  logic          desc_we;
  logic [1:0]    desc_idx;
  fp32_t         desc_data;

  // PE-block side of the MUX
  logic [PW-1:0] p_prim_idx;
  prim_t         p_prim_rdata;
  logic          p_pix_we;
  logic [XW-1:0] p_pix_idx;
  pix_t          p_pix_wdata;
  // memory-interface side of the MUX
  logic          m_prim_we;
  logic [PW-1:0] m_prim_idx;
  logic [3:0]    m_prim_word;
  fp32_t         m_prim_wdata;
  logic [XW-1:0] m_pix_idx;
  logic [1:0]    m_pix_word;
  fp32_t         m_pix_rdata;
  // buffer ports
  logic [PW-1:0] b_p_prim_idx   [2];
  prim_t         b_p_prim_rdata [2];
  logic          b_p_pix_we     [2];
  logic [XW-1:0] b_p_pix_idx    [2];
  pix_t          b_p_pix_wdata  [2];
  logic          b_m_prim_we    [2];
  logic [PW-1:0] b_m_prim_idx   [2];
  logic [3:0]    b_m_prim_word  [2];
  fp32_t         b_m_prim_wdata [2];
  logic [XW-1:0] b_m_pix_idx    [2];
  logic [1:0]    b_m_pix_word   [2];
  fp32_t         b_m_pix_rdata  [2];

  top_controller #(.MAX_PRIMS(MAX_PRIMS)) u_ctrl (
    .clk, .rst_n, .start, .mode_in(mode), .num_batches, .desc_base, .busy, .done, .overflow,
    .mode(run_mode), .sel, .pb_start, .pb_first, .pb_last, .pb_count, .pb_tile_x, .pb_tile_y,
    .pb_done, .cmd_valid, .cmd_ready, .cmd_op, .cmd_addr, .cmd_count, .cmd_done,
    .desc_we, .desc_idx, .desc_data);

  mem_interface #(.MAX_PRIMS(MAX_PRIMS), .TILE_PIX(TILE_PIX)) u_mem (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_op, .cmd_addr, .cmd_count, .cmd_done,
    .desc_we, .desc_idx, .desc_data,
    .prim_we(m_prim_we), .prim_idx(m_prim_idx), .prim_word(m_prim_word), .prim_wdata(m_prim_wdata),
    .pix_idx(m_pix_idx), .pix_word(m_pix_word), .pix_rdata(m_pix_rdata),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata);

  tile_mux #(.MAX_PRIMS(MAX_PRIMS), .TILE_PIX(TILE_PIX)) u_mux (
    .clk, .sel, .p_prim_idx, .p_prim_rdata, .p_pix_we, .p_pix_idx, .p_pix_wdata,
    .m_prim_we, .m_prim_idx, .m_prim_word, .m_prim_wdata, .m_pix_idx, .m_pix_word, .m_pix_rdata,
    .b_p_prim_idx, .b_p_prim_rdata, .b_p_pix_we, .b_p_pix_idx, .b_p_pix_wdata,
    .b_m_prim_we, .b_m_prim_idx, .b_m_prim_word, .b_m_prim_wdata, .b_m_pix_idx, .b_m_pix_word,
    .b_m_pix_rdata);

  for (genvar b = 0; b < 2; b++) begin : g_buf
    tile_buffer #(.MAX_PRIMS(MAX_PRIMS), .TILE_PIX(TILE_PIX)) u_buf (
      .clk,
      .m_prim_we(b_m_prim_we[b]), .m_prim_idx(b_m_prim_idx[b]), .m_prim_word(b_m_prim_word[b]),
      .m_prim_wdata(b_m_prim_wdata[b]), .m_pix_idx(b_m_pix_idx[b]), .m_pix_word(b_m_pix_word[b]),
      .m_pix_rdata(b_m_pix_rdata[b]),
      .p_prim_idx(b_p_prim_idx[b]), .p_prim_rdata(b_p_prim_rdata[b]),
      .p_pix_we(b_p_pix_we[b]), .p_pix_idx(b_p_pix_idx[b]), .p_pix_wdata(b_p_pix_wdata[b]));
  end

  pe_block #(.NUM_PE(NUM_PE), .PIX_PER_PE(PIX_PER_PE), .TILE_W(TILE_W), .MAX_PRIMS(MAX_PRIMS)) u_pes (
    .clk, .rst_n, .mode(run_mode), .start(pb_start), .first(pb_first), .last(pb_last),
    .count(pb_count), .tile_x(pb_tile_x), .tile_y(pb_tile_y), .done(pb_done),
    .prim_idx(p_prim_idx), .prim_rdata(p_prim_rdata),
    .pix_we(p_pix_we), .pix_idx(p_pix_idx), .pix_wdata(p_pix_wdata));

endmodule

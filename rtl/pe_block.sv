// pe_block: the PE block of the enhanced rasterizer, holding the dispatch
// controller, NUM_PE processing elements and the result collector.
//
// A tile of NUM_PE*PIX_PER_PE pixels is spread over the PEs, PE i owning the
// pixels p with p % NUM_PE == i; with the defaults (16 PEs, 16x16 tile) PE i
// owns column i of the tile. The dispatch controller broadcasts one
// (primitive, pixel slot) pair per cycle to all PEs, so the block applies one
// primitive to NUM_PE pixels per cycle. At the end of a tile's last batch the
// result collector moves the pixel results into the tile buffer.
//
// The PE count (16) is the paper's prototype; the tile size and the pixel
// ownership are this design's choices. Interface: `start` with `first`
// (clear pixel state), `last` (collect results afterwards), `count`
// primitives, and the tile's pixel origin; `done` pulses when finished. The
// tile buffer is reached through a primitive read port (one-cycle latency)
// and a pixel write port. `mode` must stay constant while the block is busy.
module pe_block
  import gaurast_pkg::*;
#(
  parameter int unsigned NUM_PE     = 16,
  parameter int unsigned PIX_PER_PE = 16,
  parameter int unsigned TILE_W     = 16,
  parameter int unsigned MAX_PRIMS  = 1024,
  localparam int unsigned TILE_PIX  = NUM_PE * PIX_PER_PE,
  localparam int unsigned PW = $clog2(MAX_PRIMS),
  localparam int unsigned CW = $clog2(MAX_PRIMS + 1),
  localparam int unsigned XW = $clog2(TILE_PIX),
  localparam int unsigned SW = (PIX_PER_PE > 1) ? $clog2(PIX_PER_PE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  mode_e         mode,
  input  logic          start,
  input  logic          first,
  input  logic          last,
  input  logic [CW-1:0] count,
  input  logic [15:0]   tile_x,
  input  logic [15:0]   tile_y,
  output logic          done,
  // tile buffer (through the MUX)
  output logic [PW-1:0] prim_idx,
  input  prim_t         prim_rdata,
  output logic          pix_we,
  output logic [XW-1:0] pix_idx,
  output pix_t          pix_wdata
);

  logic          pe_clear, pe_valid, coll_start, coll_done;
  logic [SW-1:0] pe_slot, rd_slot;
  logic [NUM_PE-1:0] busy;
  pix_t          pe_pix [NUM_PE];

  dispatch_ctrl #(.MAX_PRIMS(MAX_PRIMS), .PIX_PER_PE(PIX_PER_PE)) u_dispatch (
    .clk, .rst_n, .start, .first, .last, .count, .done,
    .prim_idx, .pe_clear, .pe_valid, .pe_slot, .pe_busy(|busy),
    .coll_start, .coll_done);

  for (genvar i = 0; i < NUM_PE; i++) begin : g_pe
    gaurast_pe #(.NUM_PE(NUM_PE), .PE_ID(i), .TILE_W(TILE_W), .PIX_PER_PE(PIX_PER_PE)) u_pe (
      .clk, .rst_n, .mode, .clear(pe_clear), .in_valid(pe_valid), .in_slot(pe_slot),
      .in_prim(prim_rdata), .tile_x, .tile_y, .rd_slot, .rd_pix(pe_pix[i]), .busy(busy[i]));
  end

  result_collector #(.NUM_PE(NUM_PE), .PIX_PER_PE(PIX_PER_PE)) u_collect (
    .clk, .rst_n, .start(coll_start), .done(coll_done), .rd_slot, .pe_pix,
    .buf_we(pix_we), .buf_idx(pix_idx), .buf_wdata(pix_wdata));

endmodule

// result_collector: copies the finished pixel results of a tile from the PEs
// into the tile buffer.
//
// After the last batch of a tile has drained, `start` makes it walk the tile's
// pixels p = 0 .. NUM_PE*PIX_PER_PE-1 in raster order, one per cycle. Pixel p
// lives in PE p % NUM_PE, slot p / NUM_PE: the slot is broadcast to every PE's
// read port, the PE is chosen by a multiplexer, and the three result words
// are written to pixel entry p of the tile buffer in the same cycle. `done`
// pulses one cycle after the last write. The paper names this block only;
// the order and the one-pixel-per-cycle rate are this design's choices.
module result_collector
  import gaurast_pkg::*;
#(
  parameter int unsigned NUM_PE     = 16,
  parameter int unsigned PIX_PER_PE = 16,
  localparam int unsigned TILE_PIX  = NUM_PE * PIX_PER_PE,
  localparam int unsigned XW        = $clog2(TILE_PIX),
  localparam int unsigned SW        = (PIX_PER_PE > 1) ? $clog2(PIX_PER_PE) : 1,
  localparam int unsigned EW        = (NUM_PE > 1) ? $clog2(NUM_PE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          done,
  // PE read ports
  output logic [SW-1:0] rd_slot,
  input  pix_t          pe_pix [NUM_PE],
  // tile-buffer pixel write port
  output logic          buf_we,
  output logic [XW-1:0] buf_idx,
  output pix_t          buf_wdata
);

  logic          active;
  logic [XW-1:0] p;

  assign rd_slot   = SW'(p / XW'(NUM_PE));
  assign buf_we    = active;
  assign buf_idx   = p;
  assign buf_wdata = pe_pix[EW'(p % XW'(NUM_PE))];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      p      <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active <= 1'b1;
        p      <= '0;
      end else if (active) begin
        if (p == XW'(TILE_PIX - 1)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
        p <= p + XW'(1);
      end
    end
  end

endmodule

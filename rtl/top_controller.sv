// top_controller: sequences the enhanced rasterizer over a list of batches.
//
// Work arrives as a command (`start`, `mode`, `num_batches`, `desc_base`).
// The shader cores, which run preprocessing and sorting, leave in memory one
// 4-word descriptor per batch at desc_base + 4*i:
//   word 0  bit 31 first batch of its tile, bit 30 last batch of its tile,
//           bits 15:0 number of primitives (at most MAX_PRIMS)
//   word 1  word address of the primitives (9 words each, sorted front to back)
//   word 2  tile origin in pixels, y in bits 31:16, x in bits 15:0
//   word 3  word address for the tile's pixel results (used by the last batch)
// A tile whose primitives do not fit one buffer is split into several batches;
// the PEs keep their pixel state from the first batch to the last.
//
// Tile buffers A and B are used as ping-pong buffers. The controller runs in
// phases: in each phase the PE block works on the selected buffer while the
// memory interface works on the other one, first storing the pixel results
// it holds (if any), then fetching the next descriptor and loading that
// batch's primitives. When both are finished the buffers swap. So loading
// batch i+1 and storing tile results overlap the computation of batch i.
// `done` pulses once every batch has been computed and every result stored.
// A descriptor with more than MAX_PRIMS primitives is cut to MAX_PRIMS and sets
// the sticky `overflow` flag.
//
// The paper shows a top controller sending control signals to both tile
// buffers and exchanging instruction data with the memory interface; the
// descriptor format, the phase scheme and the batching are this design's.
module top_controller
  import gaurast_pkg::*;
#(
  parameter int unsigned MAX_PRIMS = 1024,
  localparam int unsigned CW = $clog2(MAX_PRIMS + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  input  mode_e         mode_in,
  input  logic [15:0]   num_batches,
  input  logic [31:0]   desc_base,
  output logic          busy,
  output logic          done,
  output logic          overflow,
  // running mode, buffer select
  output mode_e         mode,
  output logic          sel,
  // PE block
  output logic          pb_start,
  output logic          pb_first,
  output logic          pb_last,
  output logic [CW-1:0] pb_count,
  output logic [15:0]   pb_tile_x,
  output logic [15:0]   pb_tile_y,
  input  logic          pb_done,
  // memory interface
  output logic          cmd_valid,
  input  logic          cmd_ready,
  output dma_op_e       cmd_op,
  output logic [31:0]   cmd_addr,
  output logic [CW-1:0] cmd_count,
  input  logic          cmd_done,
  input  logic          desc_we,
  input  logic [1:0]    desc_idx,
  input  logic [31:0]   desc_data
);

  typedef struct packed {
    logic          first;
    logic          last;
    logic [CW-1:0] count;
    logic [31:0]   prim_addr;
    logic [15:0]   tile_x;
    logic [15:0]   tile_y;
    logic [31:0]   out_addr;
  } batch_t;

  typedef enum logic [1:0] {T_IDLE, T_PHASE, T_RUN, T_DONE} top_e;
  typedef enum logic [2:0] {D_FIN, D_STORE_CMD, D_STORE_WAIT, D_FETCH_CMD, D_FETCH_WAIT,
                            D_LOAD_CMD, D_LOAD_WAIT} dma_e;

  top_e   tstate;
  dma_e   dstate;
  batch_t meta [2];
  batch_t fetched;
  logic   loaded  [2];
  logic   pending [2];
  logic   comp_busy;
  logic [15:0] n_batches, load_idx;
  logic [31:0] base;

  assign busy = (tstate != T_IDLE);
  assign done = (tstate == T_DONE);

  always_comb begin
    cmd_valid = 1'b0;
    cmd_op    = DMA_FETCH_DESC;
    cmd_addr  = '0;
    cmd_count = '0;
    unique case (dstate)
      D_STORE_CMD: begin
        cmd_valid = 1'b1;
        cmd_op    = DMA_STORE_PIX;
        cmd_addr  = meta[!sel].out_addr;
      end
      D_FETCH_CMD: begin
        cmd_valid = 1'b1;
        cmd_op    = DMA_FETCH_DESC;
        cmd_addr  = base + 32'({load_idx, 2'b00});
      end
      D_LOAD_CMD: begin
        cmd_valid = 1'b1;
        cmd_op    = DMA_LOAD_PRIM;
        cmd_addr  = fetched.prim_addr;
        cmd_count = fetched.count;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate     <= T_IDLE;
      dstate     <= D_FIN;
      sel        <= 1'b0;
      mode       <= MODE_TRI;
      comp_busy  <= 1'b0;
      n_batches  <= '0;
      load_idx   <= '0;
      base       <= '0;
      overflow   <= 1'b0;
      pb_start   <= 1'b0;
      pb_first   <= 1'b0;
      pb_last    <= 1'b0;
      pb_count   <= '0;
      pb_tile_x  <= '0;
      pb_tile_y  <= '0;
      fetched    <= '0;
      for (int b = 0; b < 2; b++) begin
        meta[b]    <= '0;
        loaded[b]  <= 1'b0;
        pending[b] <= 1'b0;
      end
    end else begin
      pb_start <= 1'b0;

      // descriptor words from the memory interface
      if (desc_we) begin
        unique case (desc_idx)
          2'd0: begin
            fetched.first <= desc_data[DESC_FIRST_BIT];
            fetched.last  <= desc_data[DESC_LAST_BIT];
            if (32'(desc_data[15:0]) > MAX_PRIMS) begin
              fetched.count <= CW'(MAX_PRIMS);
              overflow      <= 1'b1;
            end else begin
              fetched.count <= CW'(desc_data[15:0]);
            end
          end
          2'd1: fetched.prim_addr <= desc_data;
          2'd2: begin
            fetched.tile_x <= desc_data[15:0];
            fetched.tile_y <= desc_data[31:16];
          end
          default: fetched.out_addr <= desc_data;
        endcase
      end

      // PE-block thread
      if (comp_busy && pb_done) begin
        comp_busy   <= 1'b0;
        loaded[sel] <= 1'b0;
        if (meta[sel].last) pending[sel] <= 1'b1;
      end

      // memory thread, always on the buffer that is not selected
      unique case (dstate)
        D_STORE_CMD:  if (cmd_ready) dstate <= D_STORE_WAIT;
        D_STORE_WAIT: if (cmd_done) begin
          pending[!sel] <= 1'b0;
          dstate        <= (load_idx < n_batches) ? D_FETCH_CMD : D_FIN;
        end
        D_FETCH_CMD:  if (cmd_ready) dstate <= D_FETCH_WAIT;
        D_FETCH_WAIT: if (cmd_done) dstate <= D_LOAD_CMD;
        D_LOAD_CMD:   if (cmd_ready) dstate <= D_LOAD_WAIT;
        D_LOAD_WAIT:  if (cmd_done) begin
          meta[!sel]   <= fetched;
          loaded[!sel] <= 1'b1;
          load_idx     <= load_idx + 16'd1;
          dstate       <= D_FIN;
        end
        default: ;
      endcase

      unique case (tstate)
        T_IDLE: if (start) begin
          mode      <= mode_in;
          n_batches <= num_batches;
          base      <= desc_base;
          load_idx  <= '0;
          overflow  <= 1'b0;
          sel       <= 1'b0;
          for (int b = 0; b < 2; b++) begin
            loaded[b]  <= 1'b0;
            pending[b] <= 1'b0;
          end
          tstate    <= T_PHASE;
        end
        T_PHASE: begin
          if (!loaded[0] && !loaded[1] && !pending[0] && !pending[1] && load_idx >= n_batches) begin
            tstate <= T_DONE;
          end else begin
            if (loaded[sel]) begin
              pb_start  <= 1'b1;
              pb_first  <= meta[sel].first;
              pb_last   <= meta[sel].last;
              pb_count  <= meta[sel].count;
              pb_tile_x <= meta[sel].tile_x;
              pb_tile_y <= meta[sel].tile_y;
              comp_busy <= 1'b1;
            end
            if (pending[!sel])              dstate <= D_STORE_CMD;
            else if (load_idx < n_batches)  dstate <= D_FETCH_CMD;
            else                            dstate <= D_FIN;
            tstate <= T_RUN;
          end
        end
        T_RUN: if (!comp_busy && !pb_start && dstate == D_FIN) begin
          sel    <= !sel;
          tstate <= T_PHASE;
        end
        default: tstate <= T_IDLE;   // T_DONE
      endcase
    end
  end

endmodule

// mem_interface: the rasterizer's cache/memory interface, a small DMA engine
// between the memory bus and the rasterizer.
//
// It carries the three kinds of traffic drawn in the paper's block diagram:
// instruction data (batch descriptors) to the top controller, primitive data
// into the tile buffer that the PE block is not using, and pixel data out of
// that buffer. The top controller gives it one command at a time:
//   DMA_FETCH_DESC  read DESC_WORDS words at `cmd_addr`; word i appears on
//                   `desc_we`/`desc_idx`/`desc_data`;
//   DMA_LOAD_PRIM   read `cmd_count` primitives (9 words each) at `cmd_addr`
//                   into primitive entries 0 .. cmd_count-1 of the buffer;
//   DMA_STORE_PIX   write the buffer's TILE_PIX pixels (3 words each) to
//                   `cmd_addr`, pixel-major.
// `cmd_ready` is high when idle; `cmd_done` pulses when a command completes.
//
// Bus protocol (this design's choice; the paper does not describe the bus):
// word addresses, a request channel with valid/ready (a request must stay
// unchanged while valid and not ready) and an in-order read-response channel
// with no back-pressure. Writes are posted. Reads are issued back to back,
// one per cycle, with any number outstanding. A store reads its word from
// the tile buffer one cycle before offering it on the bus, so it moves at
// most one word every two cycles. Read data is passed to the descriptor and
// primitive outputs as plain wires; only the matching write strobe is raised.
// The bus assertions are disabled by the asynchronous reset (lint reports
// rst_n as used both ways for that reason only).
module mem_interface
  import gaurast_pkg::*;
#(
  parameter int unsigned MAX_PRIMS = 1024,
  parameter int unsigned TILE_PIX  = 256,
  localparam int unsigned PW = $clog2(MAX_PRIMS),
  localparam int unsigned CW = $clog2(MAX_PRIMS + 1),
  localparam int unsigned XW = $clog2(TILE_PIX)
) (
  input  logic          clk,
  input  logic          rst_n,
  // command from the top controller
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  dma_op_e       cmd_op,
  input  logic [31:0]   cmd_addr,
  input  logic [CW-1:0] cmd_count,
  output logic          cmd_done,
  // instruction data to the top controller
  output logic          desc_we,
  output logic [1:0]    desc_idx,
  output fp32_t         desc_data,
  // tile buffer (through the MUX)
  output logic          prim_we,
  output logic [PW-1:0] prim_idx,
  output logic [3:0]    prim_word,
  output fp32_t         prim_wdata,
  output logic [XW-1:0] pix_idx,
  output logic [1:0]    pix_word,
  input  fp32_t         pix_rdata,
  // memory bus
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_req_we,
  output logic [31:0]   mem_req_addr,
  output logic [31:0]   mem_req_wdata,
  input  logic          mem_rsp_valid,
  input  logic [31:0]   mem_rsp_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_ST_RD, S_ST_REQ, S_DONE} state_e;
  state_e  state;
  dma_op_e op;

  logic [31:0] base, n_words, req_cnt, rsp_cnt, st_cnt;
  logic [PW-1:0] rsp_prim;
  logic [3:0]    rsp_word;
  logic [XW-1:0] st_pix;
  logic [1:0]    st_word;
  logic          st_word_last;

  assign cmd_ready = (state == S_IDLE);
  assign cmd_done  = (state == S_DONE);

  // read path: responses land in order
  assign desc_we    = mem_rsp_valid && (state == S_READ) && (op == DMA_FETCH_DESC);
  assign desc_idx   = rsp_cnt[1:0];
  assign desc_data  = mem_rsp_rdata;
  assign prim_we    = mem_rsp_valid && (state == S_READ) && (op == DMA_LOAD_PRIM);
  assign prim_idx   = rsp_prim;
  assign prim_word  = rsp_word;
  assign prim_wdata = mem_rsp_rdata;

  // store path
  assign pix_idx      = st_pix;
  assign pix_word     = st_word;
  assign st_word_last = (st_word == 2'(PIX_WORDS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      op            <= DMA_FETCH_DESC;
      base          <= '0;
      n_words       <= '0;
      req_cnt       <= '0;
      rsp_cnt       <= '0;
      st_cnt        <= '0;
      rsp_prim      <= '0;
      rsp_word      <= '0;
      st_pix        <= '0;
      st_word       <= '0;
      mem_req_valid <= 1'b0;
      mem_req_we    <= 1'b0;
      mem_req_addr  <= '0;
      mem_req_wdata <= '0;
    end else begin
      case (state)
        S_IDLE: if (cmd_valid) begin
          op       <= cmd_op;
          base     <= cmd_addr;
          req_cnt  <= '0;
          rsp_cnt  <= '0;
          st_cnt   <= '0;
          rsp_prim <= '0;
          rsp_word <= '0;
          st_pix   <= '0;
          st_word  <= '0;
          unique case (cmd_op)
            DMA_FETCH_DESC: begin n_words <= DESC_WORDS; state <= S_READ; end
            DMA_LOAD_PRIM: begin
              n_words <= 32'(cmd_count) * PRIM_WORDS;
              state   <= (cmd_count == '0) ? S_DONE : S_READ;
            end
            default: begin n_words <= TILE_PIX * PIX_WORDS; state <= S_ST_RD; end
          endcase
        end
        S_READ: begin
          // request side
          if (mem_req_valid && mem_req_ready) begin
            mem_req_addr <= mem_req_addr + 32'd1;
            req_cnt      <= req_cnt + 32'd1;
          end
          if (req_cnt + ((mem_req_valid && mem_req_ready) ? 32'd1 : 32'd0) < n_words) begin
            mem_req_valid <= 1'b1;
            if (!mem_req_valid) mem_req_addr <= base;
          end else begin
            mem_req_valid <= 1'b0;
          end
          mem_req_we <= 1'b0;
          // response side
          if (mem_rsp_valid) begin
            rsp_cnt <= rsp_cnt + 32'd1;
            if (rsp_word == 4'(PRIM_WORDS - 1)) begin
              rsp_word <= '0;
              rsp_prim <= rsp_prim + PW'(1);
            end else begin
              rsp_word <= rsp_word + 4'd1;
            end
            if (rsp_cnt + 32'd1 == n_words) state <= S_DONE;
          end
        end
        S_ST_RD: state <= S_ST_REQ;      // buffer read data arrives next cycle
        S_ST_REQ: begin
          if (!mem_req_valid) begin
            mem_req_valid <= 1'b1;
            mem_req_we    <= 1'b1;
            mem_req_addr  <= base + st_cnt;
            mem_req_wdata <= pix_rdata;
          end else if (mem_req_ready) begin
            mem_req_valid <= 1'b0;
            mem_req_we    <= 1'b0;
            st_cnt        <= st_cnt + 32'd1;
            if (st_word_last) begin
              st_word <= '0;
              st_pix  <= st_pix + XW'(1);
            end else begin
              st_word <= st_word + 2'd1;
            end
            state <= (st_cnt + 32'd1 == n_words) ? S_DONE : S_ST_RD;
          end
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  // bus rule: a request is held until accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr)
                                                       && $stable(mem_req_we) && $stable(mem_req_wdata))
    else $error("memory request changed before it was accepted");
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> state == S_READ)
    else $error("read response outside a read command");

endmodule

// dispatch_ctrl: streams the primitives of one batch to all PEs.
//
// On `start` it optionally clears the PEs' pixel state (`first`, the first
// batch of a tile), then reads primitive i = 0 .. count-1 from the selected
// tile buffer and, for each, broadcasts it to every PE together with pixel
// slot k = 0 .. PIX_PER_PE-1, one (primitive, slot) pair per cycle. All PEs
// therefore work on the same primitive at the same time, each on its own
// pixels, and primitives are applied in the order they sit in the buffer
// (front to back, as the sort on the shader cores left them). After the last
// pair it waits for the PE pipelines to drain; if `last` (the last batch of a
// tile) it then starts the result collector and waits for it. `done` pulses
// for one cycle at the end.
//
// The paper names the dispatch controller only; the order of the loops, the
// clear/collect handshake and the batching are this design's choices.
// Timing: the tile buffer answers a read one cycle later, so `pe_valid` and
// `pe_slot` are the issue signals delayed by one cycle and line up with the
// buffer's read data, which goes to the PEs directly. A batch of N primitives
// takes N*PIX_PER_PE cycles of issue plus the pipeline drain.
module dispatch_ctrl
  import gaurast_pkg::*;
#(
  parameter int unsigned MAX_PRIMS  = 1024,
  parameter int unsigned PIX_PER_PE = 16,
  localparam int unsigned PW = $clog2(MAX_PRIMS),
  localparam int unsigned CW = $clog2(MAX_PRIMS + 1),
  localparam int unsigned SW = (PIX_PER_PE > 1) ? $clog2(PIX_PER_PE) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          first,
  input  logic          last,
  input  logic [CW-1:0] count,
  output logic          done,
  // tile-buffer read port
  output logic [PW-1:0] prim_idx,
  // to the PEs
  output logic          pe_clear,
  output logic          pe_valid,
  output logic [SW-1:0] pe_slot,
  input  logic          pe_busy,
  // to the result collector
  output logic          coll_start,
  input  logic          coll_done
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_ISSUE, S_DRAIN, S_COLLECT, S_DONE} state_e;
  state_e state;

  logic [CW-1:0] n_prims;
  logic [PW-1:0] idx;
  logic [SW-1:0] slot;
  logic          last_q;
  logic          issue;
  logic          issue_q;
  logic [SW-1:0] slot_q;

  assign issue    = (state == S_ISSUE);
  assign prim_idx = idx;
  assign pe_valid = issue_q;
  assign pe_slot  = slot_q;
  assign done     = (state == S_DONE);
  assign pe_clear = (state == S_CLEAR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      idx        <= '0;
      slot       <= '0;
      n_prims    <= '0;
      last_q     <= 1'b0;
      issue_q    <= 1'b0;
      slot_q     <= '0;
      coll_start <= 1'b0;
    end else begin
      issue_q    <= issue;
      slot_q     <= slot;
      coll_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          n_prims <= count;
          last_q  <= last;
          idx     <= '0;
          slot    <= '0;
          if (first)              state <= S_CLEAR;
          else if (count != '0)   state <= S_ISSUE;
          else                    state <= S_DRAIN;
        end
        S_CLEAR: state <= (n_prims != '0) ? S_ISSUE : S_DRAIN;
        S_ISSUE: begin
          if (slot == SW'(PIX_PER_PE - 1)) begin
            slot <= '0;
            if (CW'(idx) == n_prims - CW'(1)) state <= S_DRAIN;
            else                              idx <= idx + PW'(1);
          end else begin
            slot <= slot + SW'(1);
          end
        end
        S_DRAIN: if (!issue_q && !pe_busy) begin
          if (last_q) begin
            state      <= S_COLLECT;
            coll_start <= 1'b1;
          end else begin
            state <= S_DONE;
          end
        end
        S_COLLECT: if (coll_done) state <= S_DONE;
        default:   state <= S_IDLE;   // S_DONE
      endcase
    end
  end

endmodule

// mem_model: behavioural model of the memory behind the rasterizer's bus
// (the GPU's L2 cache and DRAM controller), for testbenches only.
//
// DEPTH 32-bit words, word addressed (addresses wrap). The request channel
// accepts a request when `req_ready` is high; `req_ready` drops at random
// (about one cycle in STALL_1_IN) so the requester's hold rule is exercised.
// Writes are posted. Read data returns in order on the response channel
// LATENCY cycles after the request was accepted. Testbenches fill and read
// `mem` directly. The model has no reset, so testbenches gate `req_valid`
// with the design's reset: until the design's first clock edge in reset its
// registers may hold random values, and a random request must not be served.
module mem_model #(
  parameter int unsigned DEPTH      = 32768,
  parameter int unsigned LATENCY    = 6,
  parameter int unsigned STALL_1_IN = 5
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  logic [31:0] req_wdata,
  output logic        rsp_valid,
  output logic [31:0] rsp_rdata
);

  logic [31:0] mem [DEPTH];
  logic        pipe_v [LATENCY];
  logic [31:0] pipe_d [LATENCY];
  int unsigned stalls = 0;

  initial begin
    req_ready = 1'b1;
    for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_rdata = pipe_d[LATENCY-1];

  always @(posedge clk) begin
    for (int i = LATENCY - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= req_valid && req_ready && !req_we;
    pipe_d[0] <= mem[req_addr % DEPTH];
    if (req_valid && req_ready && req_we) mem[req_addr % DEPTH] <= req_wdata;
    if (req_valid && !req_ready) stalls++;
    req_ready <= (($urandom % STALL_1_IN) != 0);
  end

endmodule

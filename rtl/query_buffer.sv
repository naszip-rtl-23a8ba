// query_buffer: query storage of one device path of the VPE.
//
// The host preloads the query elements this path multiplies against, in the
// order its device delivers them, before the search. During a distance
// computation a wrapped counter selects one stored element per cycle through
// a multiplexer: `start` loads the counter with the query's base index, and
// every `next` advances it, wrapping at the end of the buffer.
//
// Following the paper: host-preloaded query elements, a counter and a
// multiplexer giving one element per cycle. This design's choices: 4096
// FP32 entries per path (16384 per VPE, enough for a batch of 16 queries of
// up to 960 dimensions, each at its own base index); the counter wraps at the
// buffer size.
//
// Timing: writes take effect at the clock edge; `out` is combinational from
// the counter, so the element for the current counter value is available in
// the same cycle, and `next` moves to the following one at the clock edge.
module query_buffer
  import naszip_pkg::*;
#(
  parameter int unsigned DEPTH = 4096
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  fp32_t                    wr_data,
  input  logic                     start,
  input  logic [$clog2(DEPTH)-1:0] base,
  input  logic                     next,
  output fp32_t                    out
);
  localparam int unsigned AW = $clog2(DEPTH);

  fp32_t         mem [DEPTH];
  logic [AW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     cnt <= '0;
    else if (start) cnt <= base;
    else if (next)  cnt <= cnt + AW'(1);   // wraps at DEPTH
  end

  assign out = mem[cnt];

endmodule

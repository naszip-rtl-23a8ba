// lnc_t: local neighbor cache for the neighbor list table (LNC-T).
//
// The neighbor list table (NLT) of a sub-channel holds one 4-byte entry per
// node: 3 bytes of byte address and 1 byte of length of the node's neighbor
// list partition stored in this sub-channel. LNC-T caches NLT lines like a
// TLB: it is fully associative, each 64-byte line holds the 16 entries of
// nodes 16*t .. 16*t+15, and the tag of a line is the ID of its first entry.
//
// Lookup compares the tag of the requested node (its ID without the low four
// bits) with every valid line at once and returns the selected entry and the
// whole line. A fill writes a line fetched from memory into the next victim.
//
// Following the paper: 8 KB, fully associative, 64-byte lines of 16 entries,
// tag = ID of the first entry, 3-byte address + 1-byte length entries. This
// design's choices: round-robin replacement (the paper names no policy);
// entry j of a line is bits [32j+31:32j]; lookup is combinational.
//
// Timing: lk_hit/lk_entry/lk_line are valid in the cycle lk_id is presented;
// a fill is written at the clock edge and is visible from the next cycle.
module lnc_t
  import naszip_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 8192,
  parameter int unsigned LINE_BYTES = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [ID_W-1:0]        lk_id,
  output logic                   lk_hit,
  output nlt_entry_t             lk_entry,
  output logic [LINE_BITS-1:0]   lk_line,
  input  logic                   fill_valid,
  input  logic [ID_W-1:0]        fill_id,     // any node ID of the line
  input  logic [LINE_BITS-1:0]   fill_line
);
  localparam int unsigned NLINES = SIZE_BYTES / LINE_BYTES;   // 128
  localparam int unsigned LW     = $clog2(NLINES);
  localparam int unsigned TAG_W  = ID_W - 4;

  logic [NLINES-1:0]    valid;
  logic [TAG_W-1:0]     tag  [NLINES];
  logic [LINE_BITS-1:0] data [NLINES];
  logic [LW-1:0]        victim;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      victim <= '0;
    end else if (fill_valid) begin
      valid[victim] <= 1'b1;
      victim        <= victim + LW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      tag[victim]  <= fill_id[ID_W-1:4];
      data[victim] <= fill_line;
    end
  end

  logic [LW-1:0] hit_idx;
  always_comb begin
    lk_hit  = 1'b0;
    hit_idx = '0;
    for (int i = 0; i < NLINES; i++) begin
      if (valid[i] && tag[i] == lk_id[ID_W-1:4]) begin
        lk_hit  = 1'b1;
        hit_idx = LW'(i);
      end
    end
    lk_line  = data[hit_idx];
    lk_entry = nlt_entry_t'(lk_line[lk_id[3:0]*32 +: 32]);
  end

endmodule

// lnc_d: local neighbor cache for neighbor-list data (LNC-D).
//
// Neighbor lists of a sub-channel are stored as 4-byte node IDs, the lists of
// consecutive nodes packed one after another. LNC-D is a set-associative data
// cache of 64-byte lines of that area. Because the partitioned lists differ in
// length from node to node and sub-channel to sub-channel, a line is not
// tagged by its address but by the first and last node whose lists it holds
// (start ID, end ID). A lookup for node i in the set selected by the list's
// line address hits when a valid way has start <= i <= end.
//
// Following the paper: 256 KB, 8-way set associative, 64-byte lines, tags of
// start and end node ID. This design's choices: the set index is the low bits
// of the line address of the node's list (the NLT entry gives that address);
// the controller supplies start/end when it fills a line; round-robin
// replacement per set; tag and data arrays are synchronous-read memories.
//
// Timing: a lookup (lk_valid, lk_set, lk_id) answers two cycles later on
// rsp_valid with rsp_hit and rsp_line. A fill writes tag, data and valid bit
// at the clock edge; lookups and fills are not issued in the same cycle.
module lnc_d
  import naszip_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 262144,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned LINE_BYTES = 64
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      lk_valid,
  input  logic [$clog2(SIZE_BYTES/LINE_BYTES/WAYS)-1:0] lk_set,
  input  logic [ID_W-1:0]                           lk_id,
  output logic                                      rsp_valid,
  output logic                                      rsp_hit,
  output logic [LINE_BITS-1:0]                      rsp_line,
  input  logic                                      fill_valid,
  input  logic [$clog2(SIZE_BYTES/LINE_BYTES/WAYS)-1:0] fill_set,
  input  logic [ID_W-1:0]                           fill_start,
  input  logic [ID_W-1:0]                           fill_end,
  input  logic [LINE_BITS-1:0]                      fill_line
);
  localparam int unsigned NSETS = SIZE_BYTES / LINE_BYTES / WAYS;   // 512
  localparam int unsigned SW    = $clog2(NSETS);
  localparam int unsigned WW    = $clog2(WAYS);

  typedef struct packed {
    logic [ID_W-1:0] start_id;
    logic [ID_W-1:0] end_id;
  } dtag_t;

  logic [WAYS-1:0]      valid [NSETS];
  logic [WW-1:0]        rr    [NSETS];
  dtag_t                tag_rd [WAYS];
  logic [LINE_BITS-1:0] dmem  [NSETS*WAYS];

  // ---- tag arrays, one memory per way -------------------------------------
  for (genvar w = 0; w < WAYS; w++) begin : g_way
    dtag_t tmem [NSETS];
    always_ff @(posedge clk) begin
      if (fill_valid && rr[fill_set] == WW'(w))
        tmem[fill_set] <= '{start_id: fill_start, end_id: fill_end};
      if (lk_valid)
        tag_rd[w] <= tmem[lk_set];
    end
  end

  // ---- valid bits and replacement pointers ---------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSETS; s++) begin
        valid[s] <= '0;
        rr[s]    <= '0;
      end
    end else if (fill_valid) begin
      valid[fill_set][rr[fill_set]] <= 1'b1;
      rr[fill_set]                  <= rr[fill_set] + WW'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) dmem[{fill_set, rr[fill_set]}] <= fill_line;
  end

  // ---- lookup pipeline ----------------------------------------------------
  logic            s1_valid;
  logic [SW-1:0]   s1_set;
  logic [ID_W-1:0] s1_id;
  logic [WAYS-1:0] s1_vbits;
  logic            s1_hit;
  logic [WW-1:0]   s1_way;

  always_comb begin
    s1_hit = 1'b0;
    s1_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (s1_vbits[w] && tag_rd[w].start_id <= s1_id && s1_id <= tag_rd[w].end_id) begin
        s1_hit = 1'b1;
        s1_way = WW'(w);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_set    <= '0;
      s1_id     <= '0;
      s1_vbits  <= '0;
      rsp_valid <= 1'b0;
      rsp_hit   <= 1'b0;
    end else begin
      s1_valid  <= lk_valid;
      if (lk_valid) begin
        s1_set   <= lk_set;
        s1_id    <= lk_id;
        s1_vbits <= valid[lk_set];
      end
      rsp_valid <= s1_valid;
      rsp_hit   <= s1_valid && s1_hit;
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid) rsp_line <= dmem[{s1_set, s1_way}];
  end

  // A lookup and a fill in the same cycle would race on the arrays.
  assert property (@(posedge clk) !(lk_valid && fill_valid));

endmodule

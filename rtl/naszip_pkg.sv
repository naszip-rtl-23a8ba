// naszip_pkg: types, constants and arithmetic shared by the near-memory ANNS
// accelerator of one DDR5 rank.
//
// What is here:
//   * the sizes of the rank (two sub-channels, four x8 devices each, 128-bit
//     bursts of 16 beats, 64-byte cache lines) as the paper gives them;
//   * FP32 add, multiply and compare functions. The paper computes distances
//     with FP32 units; their insides are not given, so these are plain IEEE-754
//     single-precision operations with round-to-nearest-even, subnormals
//     flushed to zero and no NaN handling (this design's choice);
//   * the Dfloat segment configuration and the function that gives, for burst
//     number b of a vector, the element width and how many elements it holds;
//   * the neighbor list table (NLT) entry, host command and configuration types.
package naszip_pkg;

  // ---- sizes of the rank -------------------------------------------------
  localparam int unsigned N_SUBCH     = 2;    // sub-channels per rank
  localparam int unsigned N_DEV       = 4;    // x8 devices per sub-channel
  localparam int unsigned DEV_BITS    = 8;    // IO width of one device
  localparam int unsigned BURST_BEATS = 16;   // beats per burst
  localparam int unsigned BURST_BITS  = DEV_BITS * BURST_BEATS;        // 128
  localparam int unsigned LINE_BITS   = N_DEV * BURST_BITS;            // 512 = 64 B
  localparam int unsigned ID_W        = 32;   // node ID width (4-byte neighbor entries)
  localparam int unsigned N_SEG       = 4;    // Dfloat segments per vector
  localparam int unsigned FP_W        = 32;

  typedef logic [FP_W-1:0] fp32_t;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_ZERO = 32'h0000_0000;

  // ---- NLT entry: 3 bytes start address, 1 byte length --------------------
  typedef struct packed {
    logic [7:0]  len;    // number of 4-byte neighbor IDs in this sub-channel
    logic [23:0] addr;   // byte address of the partitioned neighbor list
  } nlt_entry_t;

  // ---- Dfloat segment: elements [dim_start, dim_end) in bursts [.., burst_end)
  typedef struct packed {
    logic [9:0]  burst_end;  // cumulative bursts at the end of the segment
    logic [11:0] dim_end;    // cumulative dimensions at the end of the segment
    logic [5:0]  width;      // 1 + n_exp + n_man, 9..32
    logic [3:0]  epb;        // elements per 128-bit burst = floor(128/width)
  } dfseg_t;

  typedef enum logic [0:0] { MODE_L2 = 1'b0, MODE_IP = 1'b1 } dist_mode_e;

  // Static configuration written by the host before a search.
  typedef struct packed {
    dist_mode_e                mode;
    logic [7:0]                n_access;  // memory accesses (4 bursts) per vector
    logic [31:0]               nlt_base;  // line address of the NLT
    logic [31:0]               nbr_base;  // line address of the neighbor-list area
    logic [N_SUBCH-1:0][31:0]  vec_base;  // line address of the vectors, per sub-channel
    logic [N_SUBCH-1:0][31:0]  id_base;   // first node ID stored in each sub-channel
    logic [N_SEG-1:0][$bits(dfseg_t)-1:0] seg;  // Dfloat segments, seg[0] first
  } cfg_t;

  // ---- host commands ------------------------------------------------------
  typedef enum logic [2:0] {
    OP_NOP      = 3'd0,
    OP_WR_QUERY = 3'd1,  // query buffer: path, addr, data
    OP_WR_FEE   = 3'd2,  // FEE factor alpha_k/beta_k: addr = k, data
    OP_SEARCH   = 3'd3,  // one hop: node, qid, addr = query base, data = threshold
    OP_PREFETCH = 3'd4,  // prefetch neighbor lists of each query's closest node
    OP_PQ_CLEAR = 3'd5   // empty the shared priority queue
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic [3:0]  qid;
    logic [1:0]  path;
    logic [11:0] addr;
    logic [31:0] node;
    logic [31:0] data;
  } host_cmd_t;

  // ---- FP32 arithmetic ----------------------------------------------------
  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic        s;
    logic [9:0]  e;       // signed, biased
    logic [47:0] p;
    logic [22:0] m;
    logic        g, st;
    logic [23:0] mr;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 10'(a[30:23]) + 10'(b[30:23]) - 10'd127;
    if (p[47]) begin
      m = p[46:24]; g = p[23]; st = |p[22:0]; e = e + 10'd1;
    end else begin
      m = p[45:23]; g = p[22]; st = |p[21:0];
    end
    mr = {1'b0, m} + 24'(g && (st || m[0]));
    if (mr[23]) e = e + 10'd1;
    if ($signed(e) >= 255) return {s, 8'hFF, 23'd0};
    if ($signed(e) <= 0)   return {s, 31'd0};
    return {s, e[7:0], mr[22:0]};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t       x, y;
    logic [9:0]  e;
    logic [7:0]  sh;
    logic [26:0] mx, my;
    logic [53:0] wide;
    logic [27:0] sum;
    logic [4:0]  lz;
    logic [22:0] m;
    logic        g, rs;
    logic [23:0] mr;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end else begin x = b; y = a; end
    if (x[30:23] == 8'hFF) return x;
    e  = 10'(x[30:23]);
    sh = x[30:23] - y[30:23];
    mx = {1'b1, x[22:0], 3'b000};
    if (sh > 8'd26) my = 27'd1;        // only sticky remains
    else begin
      wide = {1'b1, y[22:0], 3'b000, 27'd0} >> sh;
      my   = wide[53:27];
      my[0] = my[0] | (|wide[26:0]);
    end
    if (x[31] == y[31]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[27]) begin
        sum = {1'b0, sum[27:2], sum[1] | sum[0]};
        e = e + 10'd1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 28'd0) return FP_ZERO;
      lz = 5'd0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz = lz + 5'd1;
      end
      sum = sum << lz;
      e = e - 10'(lz);
    end
    m  = sum[25:3];
    g  = sum[2];
    rs = sum[1] | sum[0];
    mr = {1'b0, m} + 24'(g && (rs || m[0]));
    if (mr[23]) e = e + 10'd1;
    if ($signed(e) >= 255) return {x[31], 8'hFF, 23'd0};
    if ($signed(e) <= 0)   return FP_ZERO;
    return {x[31], e[7:0], mr[22:0]};
  endfunction

  // Total order key: larger key <=> larger value (zeros of both signs equal).
  function automatic logic [31:0] fp_key(input fp32_t a);
    if (a[30:23] == 8'd0) return 32'h8000_0000;
    return a[31] ? ~a : (a | 32'h8000_0000);
  endfunction

  function automatic logic fp_lt(input fp32_t a, input fp32_t b);
    return fp_key(a) < fp_key(b);
  endfunction

  // ---- Dfloat burst format -------------------------------------------------
  // Burst b (0-based) of a vector lies in the first segment whose burst_end
  // exceeds b. Its elements continue the segment where the previous burst of
  // the segment stopped: first = dim_start + (b - burst_start) * epb.
  typedef struct packed {
    logic [5:0] width;
    logic [3:0] count;
  } burst_fmt_t;

  function automatic burst_fmt_t burst_fmt(input logic [N_SEG-1:0][$bits(dfseg_t)-1:0] segs,
                                           input logic [9:0] b);
    burst_fmt_t  f;
    dfseg_t      sg;
    logic [9:0]  bstart;
    logic [11:0] dstart, first, rem;
    logic        found;
    f = '{width: 6'd32, count: 4'd0};
    bstart = 10'd0; dstart = 12'd0; found = 1'b0;
    for (int s = 0; s < N_SEG; s++) begin
      sg = dfseg_t'(segs[s]);
      if (!found && b < sg.burst_end) begin
        found   = 1'b1;
        f.width = sg.width;
        first   = dstart + 12'(b - bstart) * 12'(sg.epb);
        rem     = (sg.dim_end > first) ? sg.dim_end - first : 12'd0;
        f.count = (rem >= 12'(sg.epb)) ? sg.epb : rem[3:0];
      end
      if (!found) begin
        bstart = sg.burst_end;
        dstart = sg.dim_end;
      end
    end
    return f;
  endfunction

endpackage

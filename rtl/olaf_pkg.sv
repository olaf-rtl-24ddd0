// olaf_pkg: types, sizes and helper functions shared by the in-network
// aggregation engine.
//
// The datapath is an AXI4-Stream of 512-bit beats at 250 MHz, handled as 16
// lanes of 32 bits (lane i = tdata[32*i +: 32], byte 0 in tdata[7:0]).  An
// update packet is a fixed number of beats (one queue segment).  Its first
// beat carries the 14-byte Ethernet header and 304 bits of connectionless
// headers, which together fill lanes 0..12 exactly; lane 13 of beat 0 holds
// the worker's mean reward (FP32).  Every other lane holds FP32 gradients,
// except the last lane of the last beat, which holds the aggregation count
// (unsigned integer: how many worker updates are summed in the packet).
// The 512-bit beat, the 304-bit header, the reward / gradient / count order
// and the 24-block segment follow the paper.  The exact lane of each field,
// the integer count and all widths of identifiers are this design's choice.
//
// The FP32 helpers are combinational, round to nearest even, and flush
// subnormal inputs and results to zero.  fp32_add_f is used in the reward
// comparison; the gradient adders are the pipelined fp32_adder module.
package olaf_pkg;

  localparam int unsigned DATA_W      = 512;          // AXI beat (paper)
  localparam int unsigned LANE_W      = 32;           // FP32 lane (paper)
  localparam int unsigned LANES       = DATA_W / LANE_W; // 16 (paper)
  localparam int unsigned KEEP_W      = DATA_W / 8;
  localparam int unsigned HDR_LANES   = 13;           // 112 + 304 header bits
  localparam int unsigned REWARD_LANE = 13;           // lane of beat 0

  localparam int unsigned CLUSTER_W   = 16;
  localparam int unsigned WORKER_W    = 16;
  localparam int unsigned SEGID_W     = 16;
  localparam int unsigned QUTIL_W     = 24;           // paper: up to 24 bits
  localparam int unsigned ACTIVE_W    = 16;           // paper: 16 bits

  // Header byte offsets inside beat 0 (Ethernet + IPv4 + UDP, then the
  // application header that carries the segment number).
  localparam int unsigned OFF_IP_PROTO = 23;
  localparam int unsigned OFF_IP_SRC   = 26;
  localparam int unsigned OFF_IP_DST   = 30;
  localparam int unsigned OFF_UDP_SRC  = 34;
  localparam int unsigned OFF_UDP_DST  = 36;
  localparam int unsigned OFF_SEG_ID   = 42;
  // Queue status fields written into ACKs on the reverse path.
  localparam int unsigned OFF_QUTIL    = 44;          // 3 bytes
  localparam int unsigned OFF_ACTIVE   = 47;          // 2 bytes
  localparam int unsigned OFF_QFULL    = 49;          // 1 byte

  // What the enqueue logic does with an arriving update.
  typedef enum logic [2:0] {
    ACT_APPEND    = 3'd0,   // no update of this key queued: append at tail
    ACT_AGGREGATE = 3'd1,   // sum into the queued update
    ACT_REPLACE   = 3'd2,   // overwrite the queued update
    ACT_DROP      = 3'd3,   // discard the arriving update
    ACT_BYPASS    = 3'd4    // not a model update: forward past the queue
  } enq_action_e;

  // Decision of the reward filter.
  typedef enum logic [1:0] {
    RW_AGGREGATE = 2'd0,
    RW_REPLACE   = 2'd1,
    RW_DROP      = 2'd2
  } reward_dec_e;

  // Side-band information attached to a packet by the update identifier.
  typedef struct packed {
    logic                 is_update;   // model update from a known worker
    logic                 is_ack;      // packet from the parameter server
    logic [CLUSTER_W-1:0] cluster_id;
    logic [WORKER_W-1:0]  worker_id;
    logic [SEGID_W-1:0]   segment_id;
    logic [15:0]          key;         // hash(cluster, segment), low bits used
  } pkt_meta_t;

  // Queue status carried to the ACK path.
  typedef struct packed {
    logic [QUTIL_W-1:0]  q_util;       // occupied segments
    logic [ACTIVE_W-1:0] active;       // keys with an update in the queue
    logic                q_full;
  } q_status_t;

  function automatic logic [7:0] get_byte(input logic [DATA_W-1:0] d,
                                          input int unsigned idx);
    return d[8*idx +: 8];
  endfunction

  // Big-endian (network order) field of n bytes starting at byte off.
  function automatic logic [31:0] get_be(input logic [DATA_W-1:0] d,
                                         input int unsigned off,
                                         input int unsigned n);
    logic [31:0] v;
    v = '0;
    for (int unsigned i = 0; i < n; i++) v = {v[23:0], d[8*(off+i) +: 8]};
    return v;
  endfunction

  function automatic logic [DATA_W-1:0] put_be(input logic [DATA_W-1:0] d,
                                               input int unsigned off,
                                               input int unsigned n,
                                               input logic [31:0] v);
    logic [DATA_W-1:0] r;
    r = d;
    for (int unsigned i = 0; i < n; i++)
      r[8*(off+i) +: 8] = v[8*(n-1-i) +: 8];
    return r;
  endfunction

  // CRC-16/CCITT (polynomial 0x1021, initial value 0xFFFF) over the 13-byte
  // 5-tuple src IP, dst IP, src port, dst port, protocol, most significant
  // byte first: the Worker_ID hash.
  function automatic logic [15:0] tuple_crc16(input logic [103:0] t);
    logic [15:0] c;
    c = 16'hFFFF;
    for (int i = 103; i >= 0; i--)
      c = {c[14:0], 1'b0} ^ ((c[15] ^ t[i]) ? 16'h1021 : 16'h0000);
    return c;
  endfunction

  // Key of an update: hash over Cluster_ID and Segment_ID.  With a single
  // cluster the key equals the segment number, so the segments of one model
  // never collide.
  function automatic logic [15:0] key_hash(input logic [CLUSTER_W-1:0] c,
                                           input logic [SEGID_W-1:0] s);
    logic [31:0] m;
    m = 32'(c) * 32'h0000_9E37;
    return s ^ m[15:0] ^ m[31:16];
  endfunction

  // Combinational FP32 addition, round to nearest even, subnormals flushed
  // to zero, Inf/NaN propagated (NaN result is the quiet NaN 0x7FC00000).
  // Written as straight-line logic (one alignment shifter, one normalising
  // shifter, special cases selected at the end).
  function automatic logic [31:0] fp32_add_f(input logic [31:0] a,
                                             input logic [31:0] b);
    logic        sa, sb, sx, sy;
    logic [7:0]  ea, eb, ex, ey, d;
    logic [23:0] mx, my;
    logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero, swap;
    logic [53:0] al;             // aligned smaller operand + shifted-out bits
    logic [26:0] xs, ysh;        // 1 hidden + 23 + guard, round, sticky
    logic [27:0] sum;
    logic [4:0]  msb;
    logic [26:0] n;
    logic [9:0]  e;              // signed exponent with headroom
    logic [23:0] mant;
    logic        up;
    logic [24:0] mr;
    logic [31:0] res;
    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    a_nan  = ea == 8'hFF && a[22:0] != 0;
    b_nan  = eb == 8'hFF && b[22:0] != 0;
    a_inf  = ea == 8'hFF && a[22:0] == 0;
    b_inf  = eb == 8'hFF && b[22:0] == 0;
    a_zero = ea == 8'h00;
    b_zero = eb == 8'h00;
    // order by magnitude
    swap = {eb, b[22:0]} > {ea, a[22:0]};
    sx = swap ? sb : sa;  ex = swap ? eb : ea;
    sy = swap ? sa : sb;  ey = swap ? ea : eb;
    mx = {1'b1, swap ? b[22:0] : a[22:0]};
    my = {1'b1, swap ? a[22:0] : b[22:0]};
    d  = ex - ey;
    xs = {mx, 3'b000};
    al = (d >= 8'd27) ? {27'd0, my, 3'b000} : ({my, 3'b000, 27'd0} >> d);
    ysh = al[53:27];
    ysh[0] = ysh[0] | (|al[26:0]);
    sum = (sx == sy) ? {1'b0, xs} + {1'b0, ysh} : {1'b0, xs} - {1'b0, ysh};
    // normalise: position of the leading one of sum[26:0]
    msb = 5'd0;
    for (int i = 0; i < 27; i++) if (sum[i]) msb = 5'(i);
    if (sum[27]) begin
      n = {sum[27:2], sum[1] | sum[0]};
      e = {2'b00, ex} + 10'd1;
    end else begin
      n = sum[26:0] << (5'd26 - msb);
      e = {2'b00, ex} - {5'd0, 5'd26 - msb};
    end
    mant = n[26:3];
    up = n[2] & (n[1] | n[0] | mant[0]);
    mr = {1'b0, mant} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'd1;
    end
    if (sum == 0)                          res = 32'h0000_0000;
    else if (!e[9] && e >= 10'd255)        res = {sx, 8'hFF, 23'd0};
    else if (e[9] || e == 10'd0)           res = {sx, 31'd0};
    else                                   res = {sx, e[7:0], mr[22:0]};
    // special operands
    if (a_nan || b_nan || (a_inf && b_inf && sa != sb)) res = 32'h7FC0_0000;
    else if (a_inf)                         res = a;
    else if (b_inf)                         res = b;
    else if (a_zero && b_zero)              res = {sa & sb, 31'd0};
    else if (a_zero)                        res = b;
    else if (b_zero)                        res = a;
    return res;
  endfunction

  // a > b for FP32 values that are not NaN (+0 and -0 compare equal).
  function automatic logic fp32_gt(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] ka, kb;
    ka = a[31] ? ~a : (a | 32'h8000_0000);
    kb = b[31] ? ~b : (b | 32'h8000_0000);
    if (a[30:0] == 0 && b[30:0] == 0) return 1'b0;
    return ka > kb;
  endfunction

endpackage

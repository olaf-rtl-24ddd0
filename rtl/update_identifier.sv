// update_identifier: classifies packets and derives the identifiers the
// queue works on (the function of the first P4 stage in the paper).
//
// On the first beat of every packet it parses Ethernet/IPv4/UDP and looks
// the source and destination IPv4 addresses up in the worker table, which
// the control plane fills through the cfg_* port (entry = valid, full IP
// address, Cluster_ID, i.e. the worker's multicast group).
//   * is_update: the source is a known worker and the destination is the
//     parameter server.  Worker_ID is a hash of the 5-tuple; Segment_ID is
//     read from the application header; key = hash(Cluster_ID, Segment_ID).
//   * is_ack: the source is the parameter server and the destination a
//     known worker; Cluster_ID is that worker's.
//   * Cluster_ID of any other packet is the source worker's if the source is
//     known, else 0.
//   * anything else is non-DRL traffic (both flags low) and bypasses.
// The result is attached as side-band (m_tuser) to all beats of the packet.
// The paper implements this stage in P4 with match-action tables; this RTL
// gives the same function in the simplest form: a direct-mapped table
// indexed by the low address bits with a full-address tag (an exact match
// as long as workers' low address bits differ), a CRC-16 of the 5-tuple as hash,
// and field positions of this design's choosing (see olaf_pkg).
//
// Timing: one register stage (one cycle of latency), full throughput;
// s_tready = !m_tvalid || m_tready.
module update_identifier
  import olaf_pkg::*;
#(
  parameter int unsigned NTBL   = 2048,   // worker table entries
  localparam int unsigned TIDX_W = $clog2(NTBL)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control plane
  input  logic                 cfg_we,
  input  logic [TIDX_W-1:0]    cfg_idx,
  input  logic                 cfg_valid,
  input  logic [31:0]          cfg_ip,
  input  logic [CLUSTER_W-1:0] cfg_cluster,
  input  logic [31:0]          cfg_ps_ip,
  // stream in
  input  logic                 s_tvalid,
  output logic                 s_tready,
  input  logic [DATA_W-1:0]    s_tdata,
  input  logic                 s_tlast,
  // stream out
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic [DATA_W-1:0]    m_tdata,
  output logic                 m_tlast,
  output pkt_meta_t            m_tuser
);
  // Valid bits are flops cleared by reset; IP and cluster are a memory
  // without reset (an entry is only used while its valid bit is set).
  logic [NTBL-1:0]      t_valid;
  logic [31:0]          t_ip      [NTBL];
  logic [CLUSTER_W-1:0] t_cluster [NTBL];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      t_valid          <= '0;
    else if (cfg_we) t_valid[cfg_idx] <= cfg_valid;
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      t_ip[cfg_idx]      <= cfg_ip;
      t_cluster[cfg_idx] <= cfg_cluster;
    end
  end

  logic [31:0]   src_ip, dst_ip;
  logic [15:0]   sport, dport, ethertype;
  logic [7:0]    proto;
  logic          is_udp4, src_known, dst_known;
  logic [TIDX_W-1:0] si, di;
  pkt_meta_t     meta;

  always_comb begin
    ethertype = 16'(get_be(s_tdata, 12, 2));
    proto     = get_byte(s_tdata, OFF_IP_PROTO);
    src_ip    = get_be(s_tdata, OFF_IP_SRC, 4);
    dst_ip    = get_be(s_tdata, OFF_IP_DST, 4);
    sport     = 16'(get_be(s_tdata, OFF_UDP_SRC, 2));
    dport     = 16'(get_be(s_tdata, OFF_UDP_DST, 2));
    is_udp4   = (ethertype == 16'h0800) && (proto == 8'd17);
    si        = src_ip[TIDX_W-1:0];
    di        = dst_ip[TIDX_W-1:0];
    src_known = t_valid[si] && t_ip[si] == src_ip;
    dst_known = t_valid[di] && t_ip[di] == dst_ip;

    meta            = '0;
    meta.is_update  = is_udp4 && src_known && dst_ip == cfg_ps_ip;
    meta.is_ack     = is_udp4 && dst_known && src_ip == cfg_ps_ip;
    meta.cluster_id = meta.is_ack ? t_cluster[di] :
                      src_known   ? t_cluster[si] : '0;
    meta.worker_id  = tuple_crc16({src_ip, dst_ip, sport, dport, proto});
    meta.segment_id = 16'(get_be(s_tdata, OFF_SEG_ID, 2));
    meta.key        = key_hash(meta.cluster_id, meta.segment_id);
  end

  logic first;
  assign s_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
      m_tuser  <= '0;
      first    <= 1'b1;
    end else if (s_tready) begin
      m_tvalid <= s_tvalid;
      if (s_tvalid) begin
        m_tdata <= s_tdata;
        m_tlast <= s_tlast;
        first   <= s_tlast;
        if (first) m_tuser <= meta;
      end
    end
  end
endmodule

// olaf_engine: in-network accelerator engine for asynchronous distributed
// reinforcement learning, placed as a bump in the wire in front of the
// parameter server.
//
// Uplink (workers -> parameter server):
//   s_up -> update_identifier -> shesha_queue -> egress_shaper -> m_up
// The identifier tags model updates with Cluster_ID, Worker_ID, Segment_ID
// and key; the queue aggregates, replaces, drops or appends them and sends
// them one after the other over the (rate-limited) bottleneck link;
// non-DRL packets bypass the queue.
// Downlink (parameter server -> workers):
//   s_dn -> update_identifier -> shesha_queue (ACK path) -> ack_status_embed -> m_dn
// ACKs carry the latest global model back; they pick up the current queue
// status, which the embed stage writes into the packet, and leave with the
// cluster's multicast group on m_dn_tdest.
// Both identifier instances receive the same control-plane table writes.
// All stream ports are AXI4-Stream with 512-bit data at one beat per cycle
// (250 MHz in the paper's FPGA prototype, 128 Gbit/s raw for 100 Gbit/s
// Ethernet).  The MAC/PHY and host interfaces of the FPGA shell are not part
// of this block; its stream ports connect to them.
// q_status.q_util is 24 bits wide, as the utilisation field of the ACK; with
// NSEG = 770 its upper 13 bits are always zero (they stay for larger queues).
module olaf_engine
  import olaf_pkg::*;
#(
  parameter int unsigned NSEG      = 770,   // queue depth, updates
  parameter int unsigned BLOCKS    = 24,    // beats per update
  parameter int unsigned NKEYS     = 8192,  // tracked cluster/segment keys
  parameter int unsigned NTBL      = 2048,  // worker table entries
  parameter int unsigned ADD_LAT   = 3,
  parameter int unsigned BYP_DEPTH = 64,
  localparam int unsigned TIDX_W   = $clog2(NTBL)
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
  input  logic                 cfg_reward_en,
  input  logic [31:0]          cfg_reward_thresh,
  input  logic [15:0]          cfg_rate_num,
  input  logic [15:0]          cfg_rate_den,
  // uplink
  input  logic                 s_up_tvalid,
  output logic                 s_up_tready,
  input  logic [DATA_W-1:0]    s_up_tdata,
  input  logic                 s_up_tlast,
  output logic                 m_up_tvalid,
  input  logic                 m_up_tready,
  output logic [DATA_W-1:0]    m_up_tdata,
  output logic                 m_up_tlast,
  // downlink
  input  logic                 s_dn_tvalid,
  output logic                 s_dn_tready,
  input  logic [DATA_W-1:0]    s_dn_tdata,
  input  logic                 s_dn_tlast,
  output logic                 m_dn_tvalid,
  input  logic                 m_dn_tready,
  output logic [DATA_W-1:0]    m_dn_tdata,
  output logic                 m_dn_tlast,
  output logic                 m_dn_is_ack,
  output logic [CLUSTER_W-1:0] m_dn_tdest,
  // status
  output q_status_t            q_status,
  output logic [31:0]          stat_append,
  output logic [31:0]          stat_aggregate,
  output logic [31:0]          stat_replace,
  output logic [31:0]          stat_drop,
  output logic [31:0]          stat_bypass,
  output logic [31:0]          stat_depart,
  output logic [31:0]          stat_second,
  output logic [31:0]          stat_hazard
);
  // uplink identifier -> queue
  logic              iu_tvalid, iu_tready, iu_tlast;
  logic [DATA_W-1:0] iu_tdata;
  pkt_meta_t         iu_tuser;
  // queue -> shaper
  logic              qu_tvalid, qu_tready, qu_tlast;
  logic [DATA_W-1:0] qu_tdata;
  // downlink identifier -> queue
  logic              id_tvalid, id_tready, id_tlast;
  logic [DATA_W-1:0] id_tdata;
  pkt_meta_t         id_tuser;
  // queue -> embed
  logic              qd_tvalid, qd_tready, qd_tlast;
  logic [DATA_W-1:0] qd_tdata;
  pkt_meta_t         qd_tuser;
  q_status_t         qd_status;

  update_identifier #(.NTBL(NTBL)) u_ident_up (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_valid, .cfg_ip, .cfg_cluster, .cfg_ps_ip,
    .s_tvalid(s_up_tvalid), .s_tready(s_up_tready), .s_tdata(s_up_tdata),
    .s_tlast(s_up_tlast),
    .m_tvalid(iu_tvalid), .m_tready(iu_tready), .m_tdata(iu_tdata),
    .m_tlast(iu_tlast), .m_tuser(iu_tuser)
  );

  update_identifier #(.NTBL(NTBL)) u_ident_dn (
    .clk, .rst_n,
    .cfg_we, .cfg_idx, .cfg_valid, .cfg_ip, .cfg_cluster, .cfg_ps_ip,
    .s_tvalid(s_dn_tvalid), .s_tready(s_dn_tready), .s_tdata(s_dn_tdata),
    .s_tlast(s_dn_tlast),
    .m_tvalid(id_tvalid), .m_tready(id_tready), .m_tdata(id_tdata),
    .m_tlast(id_tlast), .m_tuser(id_tuser)
  );

  shesha_queue #(.NSEG(NSEG), .BLOCKS(BLOCKS), .NKEYS(NKEYS),
                 .ADD_LAT(ADD_LAT), .BYP_DEPTH(BYP_DEPTH)) u_queue (
    .clk, .rst_n,
    .cfg_reward_en, .cfg_reward_thresh,
    .s_up_tvalid(iu_tvalid), .s_up_tready(iu_tready), .s_up_tdata(iu_tdata),
    .s_up_tlast(iu_tlast), .s_up_tuser(iu_tuser),
    .m_up_tvalid(qu_tvalid), .m_up_tready(qu_tready), .m_up_tdata(qu_tdata),
    .m_up_tlast(qu_tlast),
    .s_dn_tvalid(id_tvalid), .s_dn_tready(id_tready), .s_dn_tdata(id_tdata),
    .s_dn_tlast(id_tlast), .s_dn_tuser(id_tuser),
    .m_dn_tvalid(qd_tvalid), .m_dn_tready(qd_tready), .m_dn_tdata(qd_tdata),
    .m_dn_tlast(qd_tlast), .m_dn_tuser(qd_tuser), .m_dn_status(qd_status),
    .q_status,
    .stat_append, .stat_aggregate, .stat_replace, .stat_drop,
    .stat_bypass, .stat_depart, .stat_second, .stat_hazard
  );

  egress_shaper u_shaper (
    .clk, .rst_n,
    .rate_num(cfg_rate_num), .rate_den(cfg_rate_den),
    .s_tvalid(qu_tvalid), .s_tready(qu_tready), .s_tdata(qu_tdata),
    .s_tlast(qu_tlast),
    .m_tvalid(m_up_tvalid), .m_tready(m_up_tready), .m_tdata(m_up_tdata),
    .m_tlast(m_up_tlast)
  );

  ack_status_embed u_ack_embed (
    .clk, .rst_n,
    .s_tvalid(qd_tvalid), .s_tready(qd_tready), .s_tdata(qd_tdata),
    .s_tlast(qd_tlast), .s_tuser(qd_tuser), .s_status(qd_status),
    .m_tvalid(m_dn_tvalid), .m_tready(m_dn_tready), .m_tdata(m_dn_tdata),
    .m_tlast(m_dn_tlast), .m_is_ack(m_dn_is_ack), .m_tdest(m_dn_tdest)
  );
endmodule

// ack_status_embed: writes the queue status into ACKs on the reverse path
// (the function of the second P4 stage in the paper).
//
// For a packet marked is_ack, the first beat gets the queue utilisation
// (24 bits), the number of active clusters (16 bits) and a one-byte full
// flag written at fixed header offsets (olaf_pkg OFF_QUTIL, OFF_ACTIVE,
// OFF_QFULL, network byte order), and the UDP checksum is set to zero
// (allowed for UDP over IPv4) because the payload changed.  The packet's
// Cluster_ID leaves on m_tdest: it selects the preconfigured multicast
// group, so that the switch delivers the ACK to every worker of the cluster.
// All other packets pass unchanged.  The field widths follow the paper; the
// offsets, the full flag byte, the checksum handling and the use of tdest
// are this design's choices.
//
// Timing: one register stage, full throughput; the status is the value
// the queue attached at the ACK's first beat.
module ack_status_embed
  import olaf_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 s_tvalid,
  output logic                 s_tready,
  input  logic [DATA_W-1:0]    s_tdata,
  input  logic                 s_tlast,
  input  pkt_meta_t            s_tuser,
  input  q_status_t            s_status,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic [DATA_W-1:0]    m_tdata,
  output logic                 m_tlast,
  output logic                 m_is_ack,
  output logic [CLUSTER_W-1:0] m_tdest
);
  logic              first;
  logic [DATA_W-1:0] d;

  always_comb begin
    d = s_tdata;
    if (first && s_tuser.is_ack) begin
      d = put_be(d, OFF_QUTIL, 3, 32'(s_status.q_util));
      d = put_be(d, OFF_ACTIVE, 2, 32'(s_status.active));
      d = put_be(d, OFF_QFULL, 1, 32'(s_status.q_full));
      d = put_be(d, 40, 2, 32'd0);          // UDP checksum
    end
  end

  assign s_tready = !m_tvalid || m_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
      m_is_ack <= 1'b0;
      m_tdest  <= '0;
      first    <= 1'b1;
    end else if (s_tready) begin
      m_tvalid <= s_tvalid;
      if (s_tvalid) begin
        m_tdata  <= d;
        m_tlast  <= s_tlast;
        m_is_ack <= s_tuser.is_ack;
        m_tdest  <= s_tuser.cluster_id;
        first    <= s_tlast;
      end
    end
  end
endmodule

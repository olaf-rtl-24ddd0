// shesha_queue: bottleneck queue that aggregates or replaces model updates
// while they wait.
//
// Each arriving model update carries a key (Cluster_ID, or a hash of
// Cluster_ID and Segment_ID), a Worker_ID and a mean reward.  On the first
// beat of an update the queue looks the key up in the cluster tracker:
//   * no update of the key queued (or only one that is locked because it is
//     already departing from the head): take a free segment from
//     available_mem_addrs, append it to out_mem_addrs and store the update
//     there (APPEND).  If there is no free segment the update is dropped;
//   * the queued update is a single update of the same worker: overwrite it
//     (REPLACE);
//   * otherwise the reward filter decides: comparable rewards are summed
//     into the queued update (AGGREGATE), a clearly higher reward replaces
//     it (REPLACE), a clearly lower one is dropped (DROP).
// An aggregated or replaced update keeps its place in the departure order.
// Departures are strictly sequential from the head of out_mem_addrs; a
// departing segment is returned to available_mem_addrs.  At most one
// unlocked update per key is in the queue.  Packets that are not model
// updates bypass the queue through a small FIFO and share the output with
// departing updates (packet-level round robin).
//
// ACKs from the parameter server pass through a register stage on the
// downlink; the queue status (occupied segments, number of keys with a
// queued update, full flag) sampled at their first beat travels with them as
// side-band, for the reverse-path signal written into the ACK downstream.
//
// Datapath: one 512-bit beat per cycle in and out.  Every segment write goes
// through beat_aggregator: the arriving beat is registered while the queued
// beat is read from segment_memory port B, then merged (or passed) in
// ADD_LAT cycles and written.  An update whose target segment still has
// writes in flight waits on its first beat (s_up_tready low); a departure
// does not start on a segment that is still being written (store and
// forward), and once started the head update is locked.  The next
// departure starts in the cycle the last beat of the current one is read,
// so back-to-back departures leave at full line rate (BLOCKS cycles each).
//
// From the paper: the memory organisation, the four pointers, the
// cluster_status / cluster_head / cluster_tail / replace_status tracking,
// the enqueue, replace, aggregate, drop and dequeue rules, the reward filter
// and the bypass of non-DRL traffic.  This design's own choices: updates are
// exactly BLOCKS beats long, the order of the same-worker rule before the
// reward filter, the pipeline and hazard handling, the bypass FIFO and the
// output arbitration.
module shesha_queue
  import olaf_pkg::*;
#(
  parameter int unsigned NSEG      = 770,   // queue depth in updates (paper)
  parameter int unsigned BLOCKS    = 24,    // 512-bit blocks per segment (paper)
  parameter int unsigned NKEYS     = 8192,  // tracked keys
  parameter int unsigned ADD_LAT   = 3,     // FP32 adder latency
  parameter int unsigned BYP_DEPTH = 64,    // bypass FIFO, beats
  localparam int unsigned QIDX_W   = $clog2(NSEG),
  localparam int unsigned BADDR_W  = $clog2(NSEG * BLOCKS),
  localparam int unsigned KEY_W    = $clog2(NKEYS),
  localparam int unsigned BEAT_W   = $clog2(BLOCKS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_reward_en,
  input  logic [31:0]       cfg_reward_thresh,   // FP32
  // uplink in: updates and other traffic from workers
  input  logic              s_up_tvalid,
  output logic              s_up_tready,
  input  logic [DATA_W-1:0] s_up_tdata,
  input  logic              s_up_tlast,
  input  pkt_meta_t         s_up_tuser,
  // uplink out: toward the parameter server (bottleneck link)
  output logic              m_up_tvalid,
  input  logic              m_up_tready,
  output logic [DATA_W-1:0] m_up_tdata,
  output logic              m_up_tlast,
  // downlink in: ACKs from the parameter server
  input  logic              s_dn_tvalid,
  output logic              s_dn_tready,
  input  logic [DATA_W-1:0] s_dn_tdata,
  input  logic              s_dn_tlast,
  input  pkt_meta_t         s_dn_tuser,
  // downlink out, with the queue status as side-band
  output logic              m_dn_tvalid,
  input  logic              m_dn_tready,
  output logic [DATA_W-1:0] m_dn_tdata,
  output logic              m_dn_tlast,
  output pkt_meta_t         m_dn_tuser,
  output q_status_t         m_dn_status,
  // live status and event counters
  output q_status_t         q_status,
  output logic [31:0]       stat_append,
  output logic [31:0]       stat_aggregate,
  output logic [31:0]       stat_replace,
  output logic [31:0]       stat_drop,
  output logic [31:0]       stat_bypass,
  output logic [31:0]       stat_depart,
  output logic [31:0]       stat_second,      // appended behind a locked update
  output logic [31:0]       stat_hazard       // cycles a first beat waited
);
  // ------------------------------------------------------------------
  // Lists, tracker, memory
  // ------------------------------------------------------------------
  typedef struct packed {
    logic [KEY_W-1:0]   key;
    logic [BADDR_W-1:0] baddr;
  } out_ent_t;

  logic               av_pop, av_app;
  logic [BADDR_W-1:0] av_head, av_app_data;
  logic               av_empty;
  logic [QIDX_W:0]    av_count;

  logic               ol_pop, ol_app;
  out_ent_t           ol_head, ol_next, ol_app_data, ol_rd_data;
  logic [QIDX_W-1:0]  ol_head_idx, ol_app_idx, ol_rd_idx;
  logic [QIDX_W:0]    ol_count;
  logic               ol_empty;

  addr_list #(.DEPTH(NSEG), .DATA_W(BADDR_W), .INIT_FULL(1'b1),
              .INIT_STRIDE(BLOCKS)) u_available_mem_addrs (
    .clk, .rst_n,
    .pop(av_pop), .head_data(av_head), .head_idx(), .next_data(),
    .append(av_app), .append_data(av_app_data), .append_idx(),
    .rd_idx('0), .rd_idx_data(),
    .count(av_count), .empty(av_empty), .full()
  );

  addr_list #(.DEPTH(NSEG), .DATA_W($bits(out_ent_t)), .INIT_FULL(1'b0),
              .INIT_STRIDE(BLOCKS)) u_out_mem_addrs (
    .clk, .rst_n,
    .pop(ol_pop), .head_data(ol_head), .head_idx(ol_head_idx), .next_data(ol_next),
    .append(ol_app), .append_data(ol_app_data), .append_idx(ol_app_idx),
    .rd_idx(ol_rd_idx), .rd_idx_data(ol_rd_data),
    .count(ol_count), .empty(ol_empty), .full()
  );

  logic [KEY_W-1:0]    lk_key;
  logic [1:0]          lk_count;
  logic [QIDX_W-1:0]   lk_head_qidx, lk_new_qidx;
  logic                lk_rflag;
  logic [WORKER_W-1:0] lk_worker;
  logic [31:0]         lk_reward;
  logic                tr_push, tr_set, tr_set_rflag, tr_pop;
  logic [WORKER_W-1:0] tr_set_worker;
  logic [31:0]         tr_set_reward;
  logic [KEY_W-1:0]    tr_pop_key;
  logic [ACTIVE_W-1:0] active;

  logic [31:0]         reward_new;
  logic [WORKER_W-1:0] worker_new;

  cluster_tracker #(.NKEYS(NKEYS), .QIDX_W(QIDX_W), .WORKER_W(WORKER_W),
                    .ACTIVE_W(ACTIVE_W)) u_cluster_tracker (
    .clk, .rst_n,
    .lk_key(lk_key), .lk_count(lk_count), .lk_head_qidx(lk_head_qidx),
    .lk_new_qidx(lk_new_qidx), .lk_rflag(lk_rflag), .lk_worker(lk_worker),
    .lk_reward(lk_reward),
    .push(tr_push), .push_key(lk_key), .push_qidx(ol_app_idx),
    .push_worker(worker_new), .push_reward(reward_new),
    .set_rep(tr_set), .set_key(lk_key), .set_rflag(tr_set_rflag),
    .set_worker(tr_set_worker), .set_reward(tr_set_reward),
    .pop(tr_pop), .pop_key(tr_pop_key),
    .active(active)
  );

  logic               mem_we, mem_re_a, mem_re_b;
  logic [BADDR_W-1:0] mem_waddr, mem_raddr_a, mem_raddr_b;
  logic [DATA_W-1:0]  mem_wdata, mem_rdata_a, mem_rdata_b;

  segment_memory #(.NSEG(NSEG), .BLOCKS(BLOCKS), .DATA_W(DATA_W)) u_segment_memory (
    .clk,
    .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .re_a(mem_re_a), .raddr_a(mem_raddr_a), .rdata_a(mem_rdata_a),
    .re_b(mem_re_b), .raddr_b(mem_raddr_b), .rdata_b(mem_rdata_b)
  );

  // ------------------------------------------------------------------
  // Write pipeline: stage 0 register + beat_aggregator
  // ------------------------------------------------------------------
  logic               s0_v, s0_merge, s0_first, s0_last;
  logic [DATA_W-1:0]  s0_beat;
  logic [BADDR_W-1:0] s0_addr;
  logic               wp_v;
  logic [BADDR_W-1:0] wp_addr;

  beat_aggregator #(.LATENCY(ADD_LAT), .TAG_W(BADDR_W)) u_beat_aggregator (
    .clk, .rst_n,
    .in_valid(s0_v), .op_merge(s0_merge), .first_beat(s0_first),
    .last_beat(s0_last), .new_beat(s0_beat), .old_beat(mem_rdata_b),
    .in_tag(s0_addr),
    .out_valid(wp_v), .out_beat(mem_wdata), .out_tag(wp_addr)
  );
  assign mem_we    = wp_v;
  assign mem_waddr = wp_addr;

  // Shadow of the addresses in flight in the write pipeline (stage 0 and
  // the ADD_LAT aggregator stages), for the hazard checks.
  logic               pend_v    [ADD_LAT+1];
  logic [BADDR_W-1:0] pend_addr [ADD_LAT+1];

  function automatic logic pending_in(input logic [BADDR_W-1:0] base);
    logic hit;
    hit = 1'b0;
    for (int i = 0; i <= int'(ADD_LAT); i++)
      if (pend_v[i] && pend_addr[i] >= base &&
          32'(pend_addr[i]) < 32'(base) + BLOCKS)
        hit = 1'b1;
    return hit;
  endfunction

  // ------------------------------------------------------------------
  // Ingress (enqueue)
  // ------------------------------------------------------------------
  logic               in_pkt;          // inside a packet (after beat 0)
  enq_action_e        in_act;
  logic [BADDR_W-1:0] in_base;
  logic [BEAT_W-1:0]  in_beat;

  enq_action_e        act;             // decision for a first beat
  reward_dec_e        rw_dec;
  logic               locked, has_entry, hazard, first_fire, beat_fire;
  logic [BADDR_W-1:0] tgt_base;
  logic               byp_full, byp_empty;
  logic               deq_busy;

  assign lk_key     = s_up_tuser.key[KEY_W-1:0];
  assign reward_new = s_up_tdata[LANE_W*REWARD_LANE +: LANE_W];
  assign worker_new = s_up_tuser.worker_id;
  assign ol_rd_idx  = lk_new_qidx;

  reward_filter u_reward_filter (
    .enable(cfg_reward_en), .threshold(cfg_reward_thresh),
    .reward_new(reward_new), .reward_old(lk_reward), .decision(rw_dec)
  );

  always_comb begin
    // The newest update of the key is locked when it is the only one and
    // it is the head update currently departing.
    locked    = (lk_count == 2'd1) && deq_busy && (lk_new_qidx == ol_head_idx);
    has_entry = (lk_count != 2'd0) && !locked;
    if (!s_up_tuser.is_update)
      act = ACT_BYPASS;
    else if (has_entry) begin
      if (lk_rflag && lk_worker == worker_new) act = ACT_REPLACE;
      else begin
        case (rw_dec)
          RW_REPLACE: act = ACT_REPLACE;
          RW_DROP:    act = ACT_DROP;
          default:    act = ACT_AGGREGATE;
        endcase
      end
    end else if (!av_empty)
      act = ACT_APPEND;
    else
      act = ACT_DROP;
    tgt_base = (act == ACT_APPEND) ? av_head : ol_rd_data.baddr;
    hazard   = (act == ACT_REPLACE || act == ACT_AGGREGATE) && pending_in(tgt_base);
  end

  always_comb begin
    if (!in_pkt)
      s_up_tready = !hazard && !(act == ACT_BYPASS && byp_full);
    else
      s_up_tready = !(in_act == ACT_BYPASS && byp_full);
  end
  assign beat_fire  = s_up_tvalid && s_up_tready;
  assign first_fire = beat_fire && !in_pkt;

  enq_action_e        cur_act;
  logic [BADDR_W-1:0] cur_base;
  logic [BEAT_W-1:0]  cur_beat;
  logic               cur_write;
  always_comb begin
    cur_act   = in_pkt ? in_act  : act;
    cur_base  = in_pkt ? in_base : tgt_base;
    cur_beat  = in_pkt ? in_beat : '0;
    cur_write = beat_fire && (cur_act == ACT_APPEND || cur_act == ACT_REPLACE ||
                              cur_act == ACT_AGGREGATE) &&
                (32'(cur_beat) < BLOCKS);
  end

  // list / tracker updates on the first beat
  assign av_pop        = first_fire && act == ACT_APPEND;
  assign ol_app        = av_pop;
  assign ol_app_data   = '{key: lk_key, baddr: av_head};
  assign tr_push       = av_pop;
  assign tr_set        = first_fire && (act == ACT_REPLACE || act == ACT_AGGREGATE);
  assign tr_set_rflag  = (act == ACT_REPLACE);
  assign tr_set_worker = (act == ACT_REPLACE) ? worker_new : lk_worker;
  assign tr_set_reward = (act == ACT_REPLACE) ? reward_new : lk_reward;

  assign mem_re_b    = cur_write && cur_act == ACT_AGGREGATE;
  assign mem_raddr_b = cur_base + BADDR_W'(cur_beat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt   <= 1'b0;
      in_act   <= ACT_DROP;
      in_base  <= '0;
      in_beat  <= '0;
      s0_v     <= 1'b0;
      s0_merge <= 1'b0;
      s0_first <= 1'b0;
      s0_last  <= 1'b0;
      s0_beat  <= '0;
      s0_addr  <= '0;
    end else begin
      if (beat_fire) begin
        if (!in_pkt) begin
          in_act  <= act;
          in_base <= tgt_base;
        end
        in_pkt  <= !s_up_tlast;
        in_beat <= (32'(cur_beat) < BLOCKS) ? cur_beat + 1'b1 : cur_beat;
      end
      s0_v     <= cur_write;
      s0_merge <= cur_act == ACT_AGGREGATE;
      s0_first <= cur_beat == '0;
      s0_last  <= 32'(cur_beat) == BLOCKS - 1;
      s0_beat  <= s_up_tdata;
      s0_addr  <= cur_base + BADDR_W'(cur_beat);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i <= int'(ADD_LAT); i++) begin
        pend_v[i]    <= 1'b0;
        pend_addr[i] <= '0;
      end
    end else begin
      pend_v[0]    <= cur_write;
      pend_addr[0] <= cur_base + BADDR_W'(cur_beat);
      for (int i = 1; i <= int'(ADD_LAT); i++) begin
        pend_v[i]    <= pend_v[i-1];
        pend_addr[i] <= pend_addr[i-1];
      end
    end
  end

  // ------------------------------------------------------------------
  // Dequeue
  // ------------------------------------------------------------------
  localparam int unsigned OF_DEPTH = 4;
  logic [BEAT_W-1:0]  deq_beat;
  out_ent_t           deq_ent;
  logic               deq_start, deq_issue, deq_done, rd_v_q, rd_last_q;
  logic               head_busy;
  logic               of_empty, of_full, of_rd;
  logic [2:0]         of_count;
  logic [DATA_W:0]    of_dout;

  // Is an ingress write still going to a segment?
  function automatic logic seg_busy(input logic [BADDR_W-1:0] base);
    return pending_in(base) ||
           (in_pkt && in_base == base &&
            (in_act == ACT_APPEND || in_act == ACT_REPLACE || in_act == ACT_AGGREGATE)) ||
           (first_fire && tgt_base == base &&
            (act == ACT_APPEND || act == ACT_REPLACE || act == ACT_AGGREGATE));
  endfunction

  // The next departure starts when the queue is idle (with the head), or in
  // the cycle the last beat of the current one is read (with the entry
  // behind the head), so that departures follow each other without a gap.
  out_ent_t deq_next;
  always_comb begin
    deq_issue = deq_busy && (32'(of_count) + 32'(rd_v_q) < OF_DEPTH);
    deq_done  = deq_issue && 32'(deq_beat) == BLOCKS - 1;
    deq_next  = deq_busy ? ol_next : ol_head;
    head_busy = seg_busy(deq_next.baddr);
    deq_start = !head_busy &&
                (deq_busy ? (deq_done && 32'(ol_count) >= 2) : !ol_empty);
  end

  assign mem_re_a    = deq_issue;
  assign mem_raddr_a = deq_ent.baddr + BADDR_W'(deq_beat);
  assign av_app      = deq_done;
  assign av_app_data = deq_ent.baddr;
  assign ol_pop      = deq_done;
  assign tr_pop      = deq_done;
  assign tr_pop_key  = deq_ent.key;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      deq_busy  <= 1'b0;
      deq_beat  <= '0;
      deq_ent   <= '0;
      rd_v_q    <= 1'b0;
      rd_last_q <= 1'b0;
    end else begin
      if (deq_start) begin
        deq_busy <= 1'b1;
        deq_beat <= '0;
        deq_ent  <= deq_next;
      end else if (deq_issue) begin
        deq_beat <= deq_beat + 1'b1;
        if (deq_done) deq_busy <= 1'b0;
      end
      rd_v_q    <= deq_issue;
      rd_last_q <= deq_done;
    end
  end

  sync_fifo #(.WIDTH(DATA_W + 1), .DEPTH(OF_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .wr_en(rd_v_q), .wr_data({rd_last_q, mem_rdata_a}),
    .rd_en(of_rd), .rd_data(of_dout),
    .empty(of_empty), .full(of_full), .count(of_count)
  );

  // ------------------------------------------------------------------
  // Bypass FIFO and output arbitration
  // ------------------------------------------------------------------
  logic            byp_wr, byp_rd;
  logic [DATA_W:0] byp_dout;
  assign byp_wr = beat_fire && cur_act == ACT_BYPASS;

  sync_fifo #(.WIDTH(DATA_W + 1), .DEPTH(BYP_DEPTH)) u_bypass_fifo (
    .clk, .rst_n,
    .wr_en(byp_wr), .wr_data({s_up_tlast, s_up_tdata}),
    .rd_en(byp_rd), .rd_data(byp_dout),
    .empty(byp_empty), .full(byp_full), .count()
  );

  typedef enum logic [1:0] {SEL_NONE, SEL_QUEUE, SEL_BYPASS} out_sel_e;
  out_sel_e sel_q, sel;
  logic     last_was_bypass;

  always_comb begin
    sel = sel_q;
    if (sel_q == SEL_NONE) begin
      if (!of_empty && (last_was_bypass || byp_empty)) sel = SEL_QUEUE;
      else if (!byp_empty)                             sel = SEL_BYPASS;
    end
    m_up_tvalid = (sel == SEL_QUEUE)  ? !of_empty :
                  (sel == SEL_BYPASS) ? !byp_empty : 1'b0;
    m_up_tdata  = (sel == SEL_BYPASS) ? byp_dout[DATA_W-1:0] : of_dout[DATA_W-1:0];
    m_up_tlast  = (sel == SEL_BYPASS) ? byp_dout[DATA_W]     : of_dout[DATA_W];
    of_rd       = (sel == SEL_QUEUE)  && m_up_tvalid && m_up_tready;
    byp_rd      = (sel == SEL_BYPASS) && m_up_tvalid && m_up_tready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q           <= SEL_NONE;
      last_was_bypass <= 1'b0;
    end else begin
      if (m_up_tvalid && m_up_tready) begin
        sel_q <= m_up_tlast ? SEL_NONE : sel;
        if (m_up_tlast) last_was_bypass <= (sel == SEL_BYPASS);
      end else begin
        sel_q <= sel;
      end
    end
  end

  // ------------------------------------------------------------------
  // Queue status and the ACK (downlink) path
  // ------------------------------------------------------------------
  always_comb begin
    q_status.q_util = QUTIL_W'(ol_count);
    q_status.active = active;
    q_status.q_full = av_empty;
  end

  logic dn_first;
  assign s_dn_tready = !m_dn_tvalid || m_dn_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_dn_tvalid <= 1'b0;
      m_dn_tdata  <= '0;
      m_dn_tlast  <= 1'b0;
      m_dn_tuser  <= '0;
      m_dn_status <= '0;
      dn_first    <= 1'b1;
    end else if (s_dn_tready) begin
      m_dn_tvalid <= s_dn_tvalid;
      if (s_dn_tvalid) begin
        m_dn_tdata <= s_dn_tdata;
        m_dn_tlast <= s_dn_tlast;
        dn_first   <= s_dn_tlast;
        if (dn_first) begin
          m_dn_tuser  <= s_dn_tuser;
          m_dn_status <= q_status;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // Event counters
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_append <= '0; stat_aggregate <= '0; stat_replace <= '0;
      stat_drop   <= '0; stat_bypass    <= '0; stat_depart  <= '0;
      stat_second <= '0; stat_hazard    <= '0;
    end else begin
      if (first_fire) begin
        case (act)
          ACT_APPEND:    stat_append    <= stat_append + 1;
          ACT_AGGREGATE: stat_aggregate <= stat_aggregate + 1;
          ACT_REPLACE:   stat_replace   <= stat_replace + 1;
          ACT_DROP:      stat_drop      <= stat_drop + 1;
          default:       stat_bypass    <= stat_bypass + 1;
        endcase
        if (act == ACT_APPEND && lk_count != 2'd0) stat_second <= stat_second + 1;
      end
      if (deq_done) stat_depart <= stat_depart + 1;
      if (s_up_tvalid && !in_pkt && hazard) stat_hazard <= stat_hazard + 1;
    end
  end

  // ------------------------------------------------------------------
  // Protocol checks
  // ------------------------------------------------------------------
  a_up_stable: assert property (@(posedge clk) disable iff (!rst_n)
                               s_up_tvalid && !s_up_tready |=> s_up_tvalid)
    else $error("shesha_queue: s_up_tvalid dropped without handshake");
  a_update_len: assert property (@(posedge clk) disable iff (!rst_n)
                                beat_fire && s_up_tlast && cur_act != ACT_BYPASS &&
                                cur_act != ACT_DROP |-> 32'(cur_beat) == BLOCKS - 1)
    else $error("shesha_queue: model update is not BLOCKS beats long");
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_up_tvalid && !m_up_tready |=> m_up_tvalid)
    else $error("shesha_queue: m_up_tvalid dropped without handshake");
endmodule

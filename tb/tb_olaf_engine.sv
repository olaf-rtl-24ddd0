// tb_olaf_engine: end-to-end test of the engine with a small queue.
//
// The worker table is programmed through the control-plane port; then real
// Ethernet/IPv4/UDP frames are sent: model updates from known workers of
// two clusters (three segments each) to the parameter server, other
// traffic that must bypass the queue, and, on the reverse path, ACKs from
// the server to workers and other packets.  A transaction-level model
// applies the enqueue rules (append, aggregate, same-worker replace,
// reward replace, reward drop, drop when full, second update behind the
// departing head) to each update when it reaches the queue; the queue's
// dequeue state gives the lock and departure timing.  Checked: identifier
// side-band (flags, Cluster_ID, key) of every packet entering the queue,
// every departing update beat by beat, bypass packets, the queue counters,
// ACKs with the queue status written into the header and tdest = cluster,
// line-rate intake, BLOCKS-cycle departures at full output rate, and the
// output rate set by the shaper.  Every mechanism must have occurred.
module tb_olaf_engine;
  import olaf_pkg::*;
  import tb_pkt_util::*;
  localparam int unsigned NSEG = 6, BLOCKS = 4, NKEYS = 16, NTBL = 64, LAT = 3;
  localparam logic [31:0] PS_IP = 32'h0A00_0001;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              cfg_we = 0, cfg_valid = 0, cfg_reward_en = 1;
  logic [5:0]        cfg_idx = '0;
  logic [31:0]       cfg_ip = '0, cfg_ps_ip = PS_IP, cfg_reward_thresh;
  logic [15:0]       cfg_cluster = '0, cfg_rate_num = 16'd1, cfg_rate_den = 16'd1;
  logic              s_up_tvalid = 0, s_up_tready, s_up_tlast = 0;
  logic [DATA_W-1:0] s_up_tdata = '0;
  logic              m_up_tvalid, m_up_tready = 0, m_up_tlast;
  logic [DATA_W-1:0] m_up_tdata;
  logic              s_dn_tvalid = 0, s_dn_tready, s_dn_tlast = 0;
  logic [DATA_W-1:0] s_dn_tdata = '0;
  logic              m_dn_tvalid, m_dn_tready = 1, m_dn_tlast, m_dn_is_ack;
  logic [DATA_W-1:0] m_dn_tdata;
  logic [15:0]       m_dn_tdest;
  q_status_t         q_status;
  logic [31:0] stat_append, stat_aggregate, stat_replace, stat_drop,
               stat_bypass, stat_depart, stat_second, stat_hazard;

  olaf_engine #(.NSEG(NSEG), .BLOCKS(BLOCKS), .NKEYS(NKEYS), .NTBL(NTBL),
                .ADD_LAT(LAT), .BYP_DEPTH(8)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------- packets ----------------
  typedef logic [BLOCKS-1:0][DATA_W-1:0] beats_t;
  typedef struct {
    beats_t    b;
    int        nb;
    pkt_meta_t m;       // expected side-band at the queue input
    real       reward;
  } pkt_t;

  // worker w: IP 10.1.0.(w+2), UDP ports 5000+w -> 7000, cluster w % 2
  function automatic logic [31:0] wip(input int w);
    return 32'h0A01_0000 | 32'(w + 2);
  endfunction

  function automatic logic [31:0] rnd_fp();
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(115 + ($urandom % 20));
    return r;
  endfunction

  int seq = 0;
  // kind 0: update of worker w for segment seg; 1: other uplink traffic
  function automatic pkt_t make_pkt(input int kind, input int w, input int seg,
                                    input real reward);
    pkt_t p;
    logic [31:0] sip, dip;
    logic [15:0] sp, dp;
    for (int j = 0; j < BLOCKS; j++)
      for (int i = 0; i < 16; i++) p.b[j][32*i +: 32] = rnd_fp();
    if (kind == 0) begin
      sip = wip(w); dip = PS_IP;
    end else if ($urandom % 2) begin
      sip = wip(w); dip = 32'h0A00_0063;              // not to the server
    end else begin
      sip = 32'h0A01_0000 | 32'(50 + $urandom % 10);  // unknown host
      dip = PS_IP;
    end
    sp = 16'(5000 + w); dp = 16'd7000;
    p.b[0] = hdr_beat(sip, dip, sp, dp, 16'(seg), 8'd17, 16'h0800);
    for (int i = 14; i < 16; i++) p.b[0][32*i +: 32] = rnd_fp();  // gradients
    p.b[0][31:0] = 32'(seq++);                      // dst MAC bytes: sequence
    p.b[0][32*REWARD_LANE +: 32] = tb_fp_util::r2f(reward);
    p.b[BLOCKS-1][32*15 +: 32] = 32'd1;             // aggregation count
    p.nb = (kind == 0) ? int'(BLOCKS) : 1 + ($urandom % 2);
    p.m = '0;
    p.m.is_update  = (kind == 0);
    p.m.cluster_id = (kind == 0) ? 16'(w % 2) : 16'd0;
    p.m.worker_id  = worker_crc(sip, dip, sp, dp, 8'd17);
    p.m.segment_id = 16'(seg);
    p.m.key        = key_hash(p.m.cluster_id, 16'(seg));
    p.reward = reward;
    return p;
  endfunction

  // ---------------- reference model ----------------
  typedef struct {
    int     key, worker;
    real    reward;
    bit     rflag;
    beats_t b;
  } ent_t;
  ent_t   mq [$];
  beats_t exp_out [$];
  logic [DATA_W-1:0] exp_byp [$];
  pkt_t   sent [$];
  int n_app = 0, n_agg = 0, n_rep = 0, n_drop = 0, n_byp = 0, n_sec = 0, n_dep = 0;
  int n_full_drop = 0, n_rw_drop = 0, n_rw_rep = 0, n_same_rep = 0;
  int n_ack = 0, n_dn_other = 0, n_shaped = 0;
  real thresh = 4.0;

  function automatic beats_t merge(input beats_t o, input beats_t n);
    beats_t r;
    for (int j = 0; j < BLOCKS; j++)
      for (int i = 0; i < 16; i++) begin
        logic [31:0] a, c;
        a = o[j][32*i +: 32];
        c = n[j][32*i +: 32];
        if (j == 0 && i <= 13)               r[j][32*i +: 32] = a;
        else if (j == BLOCKS - 1 && i == 15) r[j][32*i +: 32] = a + c;
        else                                 r[j][32*i +: 32] = tb_fp_util::fadd(a, c);
      end
    return r;
  endfunction

  function automatic bit same(input beats_t x, input beats_t y);
    for (int j = 0; j < BLOCKS; j++) if (x[j] != y[j]) return 0;
    return 1;
  endfunction

  task automatic model_arrival(input pkt_t p, input bit head_departing);
    int idx, key;
    if (!p.m.is_update) begin
      exp_byp.push_back(p.b[0]);
      n_byp++;
      return;
    end
    key = int'(p.m.key) % NKEYS;
    idx = -1;
    for (int i = 0; i < mq.size(); i++)
      if (mq[i].key == key && !(i == 0 && head_departing)) idx = i;
    if (idx >= 0) begin
      if (mq[idx].rflag && mq[idx].worker == int'(p.m.worker_id)) begin
        mq[idx].b = p.b; mq[idx].reward = p.reward; n_rep++; n_same_rep++;
      end else if (p.reward - mq[idx].reward > thresh) begin
        mq[idx].b = p.b; mq[idx].reward = p.reward; mq[idx].rflag = 1;
        mq[idx].worker = int'(p.m.worker_id); n_rep++; n_rw_rep++;
      end else if (mq[idx].reward - p.reward > thresh) begin
        n_drop++; n_rw_drop++;
      end else begin
        mq[idx].b = merge(mq[idx].b, p.b); mq[idx].rflag = 0; n_agg++;
      end
    end else if (mq.size() < NSEG) begin
      ent_t e;
      for (int i = 0; i < mq.size(); i++) if (mq[i].key == key) n_sec++;
      e.key = key; e.worker = int'(p.m.worker_id); e.reward = p.reward;
      e.rflag = 1; e.b = p.b;
      mq.push_back(e);
      n_app++;
    end else begin
      n_drop++; n_full_drop++;
    end
  endtask

  // ---------------- monitors (falling edge) ----------------
  bit in_pkt = 0, dn_first = 1, dn_q_first = 1, dn_out_first = 1;
  typedef struct { logic [DATA_W-1:0] d; bit ack; bit first; logic [15:0] c; } dn_t;
  dn_t dn_sent [$];      // downlink beats as sent
  dn_t dn_exp [$];       // expected downlink output
  beats_t cur_out;
  int out_beat = 0, out_first_cyc = 0, cyc = 0, n_contig = 0;
  bit out_all_ready = 1, full_rate = 1;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    // updates reach the queue one register stage after the engine input
    if (dut.u_queue.s_up_tvalid && dut.u_queue.s_up_tready) begin
      if (!in_pkt) begin
        pkt_t p;
        p = sent.pop_front();
        chk(dut.u_queue.s_up_tuser.is_update == p.m.is_update &&
            dut.u_queue.s_up_tuser.is_ack == 1'b0 &&
            (!p.m.is_update || (dut.u_queue.s_up_tuser.cluster_id == p.m.cluster_id &&
                                dut.u_queue.s_up_tuser.worker_id == p.m.worker_id &&
                                dut.u_queue.s_up_tuser.key == p.m.key)),
            "update identified");
        model_arrival(p, dut.u_queue.deq_busy);
      end
      in_pkt = !dut.u_queue.s_up_tlast;
    end
    if (dut.u_queue.deq_done) begin
      exp_out.push_back(mq[0].b);
      void'(mq.pop_front());
      n_dep++;
    end
    // downlink: status taken when the packet's first beat enters the queue
    if (dut.u_queue.s_dn_tvalid && dut.u_queue.s_dn_tready) begin
      dn_t s, e;
      s = dn_sent.pop_front();
      e = s;
      if (dn_q_first && s.ack) begin
        e.d[8*44 +: 8] = q_status.q_util[23:16];
        e.d[8*45 +: 8] = q_status.q_util[15:8];
        e.d[8*46 +: 8] = q_status.q_util[7:0];
        e.d[8*47 +: 8] = q_status.active[15:8];
        e.d[8*48 +: 8] = q_status.active[7:0];
        e.d[8*49 +: 8] = {7'd0, q_status.q_full};
        e.d[8*40 +: 16] = '0;
      end
      dn_exp.push_back(e);
      dn_q_first = dut.u_queue.s_dn_tlast;
    end
    if (m_dn_tvalid && m_dn_tready) begin
      dn_t e;
      e = dn_exp.pop_front();
      chk(m_dn_tdata == e.d && m_dn_is_ack == e.ack && (!e.ack || m_dn_tdest == e.c),
          "downlink packet");
    end
    // the shaper holds back a beat the queue offers although the link is ready
    if (dut.u_queue.m_up_tvalid && m_up_tready && !m_up_tvalid) n_shaped++;
    // uplink output
    if (m_up_tvalid && m_up_tready) begin
      if (out_beat == 0) out_first_cyc = cyc;
      if (out_beat < int'(BLOCKS)) cur_out[out_beat] = m_up_tdata;
      out_beat++;
      if (m_up_tlast) begin
        beats_t e;
        bit is_byp;
        is_byp = exp_byp.size() > 0 && exp_byp[0] == cur_out[0];
        if (is_byp) void'(exp_byp.pop_front());
        else begin
          chk(exp_out.size() > 0, "departure expected");
          if (exp_out.size() > 0) begin
            e = exp_out.pop_front();
            chk(out_beat == int'(BLOCKS) && same(e, cur_out), "departed update content");
          end
          if (out_all_ready && full_rate) begin
            n_contig++;
            chk(cyc - out_first_cyc == int'(BLOCKS) - 1, "update leaves in BLOCKS cycles");
          end
        end
        out_beat = 0;
        out_all_ready = 1;
      end
    end else if (out_beat > 0) out_all_ready = 0;
  end

  // ---------------- drivers ----------------
  task automatic send(input pkt_t p, input int gap_pct);
    sent.push_back(p);
    for (int j = 0; j < p.nb; j++) begin
      s_up_tvalid = 1; s_up_tdata = p.b[j]; s_up_tlast = (j == p.nb - 1);
      @(negedge clk);
      while (!s_up_tready) @(negedge clk);
      @(posedge clk); #1;
      if (($urandom % 100) < gap_pct) begin
        s_up_tvalid = 0;
        @(posedge clk); #1;
      end
    end
    s_up_tvalid = 0;
  endtask

  bit dn_busy = 0;
  task automatic send_dn(input bit ack, input int w);
    dn_busy = 1;
    for (int j = 0; j < 2; j++) begin
      dn_t s;
      s_dn_tvalid = 1;
      s_dn_tdata  = (j == 0) ? hdr_beat(ack ? PS_IP : 32'h0A00_0063, wip(w), 16'd7000,
                                        16'(5000 + w), 16'd0, 8'd17, 16'h0800)
                             : {16{$urandom}};
      s_dn_tlast  = (j == 1);
      s.d = s_dn_tdata; s.ack = ack; s.first = (j == 0); s.c = 16'(w % 2);
      dn_sent.push_back(s);
      @(negedge clk);
      while (!s_dn_tready) @(negedge clk);
      @(posedge clk); #1;
    end
    s_dn_tvalid = 0;
    if (ack) n_ack++; else n_dn_other++;
    dn_busy = 0;
  endtask

  // Mode 2 holds the output until the input has been stalled for 300
  // cycles (a bypass packet behind a full bypass FIFO would otherwise wait
  // for ever, since the sender is what leaves mode 2).
  int ready_mode = 0;   // 0 random, 1 always, 2 never
  int in_stall = 0;
  always @(posedge clk) begin
    in_stall <= (s_up_tvalid && !s_up_tready) ? in_stall + 1 : 0;
    #2;
    case (ready_mode)
      1: m_up_tready = 1;
      2: m_up_tready = in_stall > 300;
      default: m_up_tready = ($urandom % 3) != 0;
    endcase
  end

  // key k in 0..5: cluster k/3, segment k%3; two workers per cluster
  function automatic int wk(input int k, input int alt);
    return (k / 3) + 2 * alt;
  endfunction

  int t0, t1, g0;
  initial begin
    cfg_reward_thresh = tb_fp_util::r2f(4.0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    for (int w = 0; w < 8; w++) begin
      cfg_we = 1; cfg_idx = 6'(wip(w)); cfg_valid = 1; cfg_ip = wip(w);
      cfg_cluster = 16'(w % 2);
      @(posedge clk); #1;
    end
    cfg_we = 0;

    // 1) line rate: NSEG back-to-back appends of distinct keys, output held
    ready_mode = 2;
    t0 = cyc;
    for (int k = 0; k < NSEG; k++) send(make_pkt(0, wk(k, 0), k % 3, 0.0), 0);
    t1 = cyc;
    chk(t1 - t0 == int'(NSEG * BLOCKS), "appends accepted at one beat per cycle");
    for (int k = 0; k < NSEG; k++) send(make_pkt(0, wk(k, 1), k % 3, 1.0), 0);
    send(make_pkt(0, 0, 9, 0.0), 0);                    // new key, queue full
    send_dn(1, 0);                                      // ACK reports a full queue
    ready_mode = 1;
    repeat (NSEG * BLOCKS + 40) @(posedge clk);
    #1;

    // 2) shaped output: half rate
    cfg_rate_num = 16'd1; cfg_rate_den = 16'd2; full_rate = 0;
    g0 = cyc;
    for (int k = 0; k < NSEG; k++) send(make_pkt(0, wk(k, 0), k % 3, 0.0), 0);
    repeat (10) @(posedge clk);
    wait (mq.size() == 0 && exp_out.size() == 0);
    chk(cyc - g0 >= int'(NSEG * BLOCKS * 2) - 4, "output limited to half rate");
    cfg_rate_den = 16'd1; full_rate = 1;
    repeat (20) @(posedge clk);
    #1;

    // 3) random traffic
    for (int k = 0; k < 700; k++) begin
      int key, alt;
      real r;
      if (k % 50 == 0) ready_mode = ($urandom % 3 == 0) ? 2 : 0;
      if (k % 50 == 25) ready_mode = 0;
      key = $urandom % 6;
      alt = $urandom % 2;
      r   = real'($urandom % 48) / 2.0;
      if (($urandom % 10) == 0) send(make_pkt(1, $urandom % 8, 0, 0.0), 20);
      else                      send(make_pkt(0, wk(key, alt), key % 3, r), 20);
      if (($urandom % 8) == 0 && !dn_busy)
        fork send_dn(($urandom % 4) != 0, $urandom % 8); join_none
      if (($urandom % 4) == 0) begin
        repeat ($urandom % 10) @(posedge clk);
        #1;
      end
    end
    ready_mode = 1;
    repeat (NSEG * BLOCKS * 4 + 100) @(posedge clk);

    // 4) final comparisons
    chk(mq.size() == 0 && exp_out.size() == 0 && exp_byp.size() == 0 &&
        dn_exp.size() == 0 && dn_sent.size() == 0, "all packets delivered");
    chk(stat_append == 32'(n_app), "append count");
    chk(stat_aggregate == 32'(n_agg), "aggregate count");
    chk(stat_replace == 32'(n_rep), "replace count");
    chk(stat_drop == 32'(n_drop), "drop count");
    chk(stat_bypass == 32'(n_byp), "bypass count");
    chk(stat_depart == 32'(n_dep), "departure count");
    chk(stat_second == 32'(n_sec), "second-update count");
    chk(q_status.q_util == 0 && q_status.active == 0, "queue empty at end");
    $display("events: append %0d aggregate %0d replace %0d (same worker %0d, reward %0d) drop %0d (full %0d, reward %0d) bypass %0d second %0d hazard-cycles %0d contiguous %0d acks %0d other-dn %0d shaped %0d",
             n_app, n_agg, n_rep, n_same_rep, n_rw_rep, n_drop, n_full_drop, n_rw_drop,
             n_byp, n_sec, stat_hazard, n_contig, n_ack, n_dn_other, n_shaped);
    chk(n_app > 0 && n_agg > 0 && n_same_rep > 0 && n_rw_rep > 0 && n_full_drop > 0 &&
        n_rw_drop > 0 && n_byp > 0 && n_sec > 0 && stat_hazard > 0 && n_contig > 0 &&
        n_ack > 0 && n_dn_other > 0 && n_shaped > 0,
        "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

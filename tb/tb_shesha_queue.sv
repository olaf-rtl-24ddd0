// tb_shesha_queue: random update traffic into a small queue, checked
// against a transaction-level model of the enqueue rules.
//
// Updates of a few keys and workers with nearby rewards are sent with
// random gaps, mixed with non-DRL (bypass) packets, while the output is
// stalled at random, so that appends, same-worker replacements, reward
// replacements, aggregations, reward drops, drops on a full queue and
// second updates behind a departing (locked) head all occur.  The model
// applies each update when its first beat is accepted; which queued update
// is departing at that moment (the lock) and when a departure frees its
// segment are taken from the queue's dequeue state, since the paper leaves
// that timing open.  Every departing packet is compared beat by beat with
// the model, bypass packets with what was sent, the event counters with
// the model's counts, and ACKs must leave unchanged with the queue status
// of their arrival.  Also checked: back-to-back appends are accepted at
// one beat per cycle (line rate), and a departing update of BLOCKS beats
// leaves in BLOCKS consecutive cycles when the output is ready.
module tb_shesha_queue;
  import olaf_pkg::*;
  localparam int unsigned NSEG = 6, BLOCKS = 4, NKEYS = 16, LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              cfg_reward_en = 1'b1;
  logic [31:0]       cfg_reward_thresh;
  logic              s_up_tvalid = 0, s_up_tready, s_up_tlast = 0;
  logic [DATA_W-1:0] s_up_tdata = '0;
  pkt_meta_t         s_up_tuser = '0;
  logic              m_up_tvalid, m_up_tready = 0, m_up_tlast;
  logic [DATA_W-1:0] m_up_tdata;
  logic              s_dn_tvalid = 0, s_dn_tready, s_dn_tlast = 0;
  logic [DATA_W-1:0] s_dn_tdata = '0;
  pkt_meta_t         s_dn_tuser = '0;
  logic              m_dn_tvalid, m_dn_tready = 1, m_dn_tlast;
  logic [DATA_W-1:0] m_dn_tdata;
  pkt_meta_t         m_dn_tuser;
  q_status_t         m_dn_status, q_status;
  logic [31:0] stat_append, stat_aggregate, stat_replace, stat_drop,
               stat_bypass, stat_depart, stat_second, stat_hazard;

  shesha_queue #(.NSEG(NSEG), .BLOCKS(BLOCKS), .NKEYS(NKEYS), .ADD_LAT(LAT),
                 .BYP_DEPTH(8)) dut (.*);

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
    pkt_meta_t m;
    real       reward;
  } pkt_t;

  function automatic logic [31:0] rnd_fp();
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(115 + ($urandom % 20));
    return r;
  endfunction

  int seq = 0;
  function automatic pkt_t make_pkt(input bit upd, input int key, input int worker,
                                    input real reward);
    pkt_t p;
    for (int j = 0; j < BLOCKS; j++)
      for (int i = 0; i < 16; i++) p.b[j][32*i +: 32] = rnd_fp();
    p.b[0][31:0] = 32'(seq++);                     // header: sequence number
    p.b[0][32*REWARD_LANE +: 32] = tb_fp_util::r2f(reward);
    p.b[BLOCKS-1][32*15 +: 32] = 32'd1;            // aggregation count
    p.m = '0;
    p.m.is_update = upd;
    p.m.key = 16'(key);
    p.m.worker_id = 16'(worker);
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
  ent_t   mq [$];           // queued updates, departure order
  beats_t exp_out [$];      // departed updates, to appear on m_up
  logic [DATA_W-1:0] exp_byp [$];   // first beat of bypass packets
  pkt_t   sent [$];         // packets whose first beat is pending
  int n_app = 0, n_agg = 0, n_rep = 0, n_drop = 0, n_byp = 0, n_sec = 0, n_dep = 0;
  int n_full_drop = 0, n_rw_drop = 0, n_rw_rep = 0, n_same_rep = 0;
  real thresh = 4.0;

  function automatic beats_t merge(input beats_t o, input beats_t n);
    beats_t r;
    for (int j = 0; j < BLOCKS; j++)
      for (int i = 0; i < 16; i++) begin
        logic [31:0] a, c;
        a = o[j][32*i +: 32];
        c = n[j][32*i +: 32];
        if (j == 0 && i <= 13)                      r[j][32*i +: 32] = a;
        else if (j == BLOCKS - 1 && i == 15)        r[j][32*i +: 32] = a + c;
        else                                        r[j][32*i +: 32] = tb_fp_util::fadd(a, c);
      end
    return r;
  endfunction

  function automatic bit same(input beats_t x, input beats_t y);
    for (int j = 0; j < BLOCKS; j++) if (x[j] != y[j]) return 0;
    return 1;
  endfunction

  task automatic model_arrival(input pkt_t p, input bit head_departing);
    int idx;
    if (!p.m.is_update) begin
      exp_byp.push_back(p.b[0]);
      n_byp++;
      return;
    end
    idx = -1;
    for (int i = 0; i < mq.size(); i++)
      if (mq[i].key == int'(p.m.key) && !(i == 0 && head_departing)) idx = i;
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
      for (int i = 0; i < mq.size(); i++) if (mq[i].key == int'(p.m.key)) n_sec++;
      e.key = int'(p.m.key); e.worker = int'(p.m.worker_id); e.reward = p.reward;
      e.rflag = 1; e.b = p.b;
      mq.push_back(e);
      n_app++;
    end else begin
      n_drop++; n_full_drop++;
    end
  endtask

  // Monitor at the falling edge: handshakes seen here complete at the next
  // rising edge.
  bit in_pkt = 0, dn_first = 1;
  q_status_t dn_exp_status [$];
  logic [DATA_W-1:0] dn_exp_data [$];
  beats_t cur_out;
  int out_beat = 0, out_first_cyc = 0, cyc = 0, n_contig = 0, out_from_byp = 0;
  bit out_all_ready = 1;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (s_up_tvalid && s_up_tready) begin
      if (!in_pkt) model_arrival(sent.pop_front(), dut.deq_busy);
      in_pkt = !s_up_tlast;
    end
    if (dut.deq_done) begin
      exp_out.push_back(mq[0].b);
      void'(mq.pop_front());
      n_dep++;
    end
    if (s_dn_tvalid && s_dn_tready) begin
      dn_exp_data.push_back(s_dn_tdata);
      if (dn_first) dn_exp_status.push_back(q_status);
      dn_first = s_dn_tlast;
    end
    if (m_dn_tvalid && m_dn_tready) begin
      chk(m_dn_tdata == dn_exp_data.pop_front(), "ACK data unchanged");
    end
    // output packets
    if (m_up_tvalid && m_up_tready) begin
      if (out_beat == 0) out_first_cyc = cyc;
      if (out_beat < int'(BLOCKS)) cur_out[out_beat] = m_up_tdata;
      out_beat++;
      if (m_up_tlast) begin
        beats_t e;
        bit is_byp;
        is_byp = exp_byp.size() > 0 && exp_byp[0] == cur_out[0];
        if (is_byp) begin
          void'(exp_byp.pop_front());
          out_from_byp++;
        end else begin
          chk(exp_out.size() > 0, "departure expected");
          if (exp_out.size() > 0) begin
            e = exp_out.pop_front();
            chk(out_beat == int'(BLOCKS) && same(e, cur_out), "departed update content");
          end
          if (out_all_ready) begin
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
    int n;
    n = p.m.is_update ? int'(BLOCKS) : 1 + ($urandom % 2);
    sent.push_back(p);
    for (int j = 0; j < n; j++) begin
      s_up_tvalid = 1; s_up_tdata = p.b[j]; s_up_tlast = (j == n - 1);
      s_up_tuser = p.m;
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

  bit ack_busy = 0;
  task automatic send_ack();
    ack_busy = 1;
    for (int j = 0; j < 2; j++) begin
      s_dn_tvalid = 1; s_dn_tdata = {16{$urandom}}; s_dn_tlast = (j == 1);
      s_dn_tuser = '0; s_dn_tuser.is_ack = 1;
      @(negedge clk);
      while (!s_dn_tready) @(negedge clk);
      @(posedge clk); #1;
    end
    s_dn_tvalid = 0;
    ack_busy = 0;
  endtask

  // ACK status check: status sampled at the ACK's first beat
  bit dn_out_first = 1;
  always @(negedge clk) if (rst_n && m_dn_tvalid && m_dn_tready) begin
    if (dn_out_first) begin
      q_status_t e;
      e = dn_exp_status.pop_front();
      chk(m_dn_status == e, "ACK carries queue status");
    end
    dn_out_first = m_dn_tlast;
  end

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

  int t0, t1;
  initial begin
    cfg_reward_thresh = tb_fp_util::r2f(4.0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // 1) line rate: NSEG back-to-back appends of distinct keys, output held
    ready_mode = 2;
    t0 = cyc;
    for (int k = 0; k < NSEG; k++) send(make_pkt(1, k, k, 0.0), 0);
    t1 = cyc;
    chk(t1 - t0 == int'(NSEG * BLOCKS), "appends accepted at one beat per cycle");
    // same keys again, new workers, comparable rewards: aggregated in place
    for (int k = 0; k < NSEG; k++) send(make_pkt(1, k, 100 + k, 1.0), 0);
    // queue full: a new key is dropped
    send(make_pkt(1, 9, 9, 0.0), 0);
    ready_mode = 1;
    repeat (NSEG * BLOCKS + 40) @(posedge clk);
    #1;

    // 2) random traffic
    for (int k = 0; k < 700; k++) begin
      int key, w;
      real r;
      if (k % 50 == 0) ready_mode = ($urandom % 3 == 0) ? 2 : 0;
      if (k % 50 == 25) ready_mode = 0;
      key = $urandom % 5;
      w   = key * 4 + ($urandom % 2);
      r   = real'($urandom % 48) / 2.0;
      if (($urandom % 10) == 0) send(make_pkt(0, 0, 0, 0.0), 20);
      else                      send(make_pkt(1, key, w, r), 20);
      if (($urandom % 8) == 0 && !ack_busy) fork send_ack(); join_none
      if (($urandom % 4) == 0) begin
        repeat ($urandom % 10) @(posedge clk);
        #1;
      end
    end
    ready_mode = 1;
    repeat (NSEG * BLOCKS * 4 + 100) @(posedge clk);

    // 3) final comparisons
    chk(mq.size() == 0 && exp_out.size() == 0 && exp_byp.size() == 0, "all updates delivered");
    chk(stat_append == 32'(n_app), "append count");
    chk(stat_aggregate == 32'(n_agg), "aggregate count");
    chk(stat_replace == 32'(n_rep), "replace count");
    chk(stat_drop == 32'(n_drop), "drop count");
    chk(stat_bypass == 32'(n_byp), "bypass count");
    chk(stat_depart == 32'(n_dep), "departure count");
    chk(stat_second == 32'(n_sec), "second-update count");
    chk(q_status.q_util == 0 && q_status.active == 0, "queue empty at end");
    $display("events: append %0d aggregate %0d replace %0d (same worker %0d, reward %0d) drop %0d (full %0d, reward %0d) bypass %0d second %0d hazard-cycles %0d contiguous %0d",
             n_app, n_agg, n_rep, n_same_rep, n_rw_rep, n_drop, n_full_drop, n_rw_drop,
             n_byp, n_sec, stat_hazard, n_contig);
    chk(n_app > 0 && n_agg > 0 && n_same_rep > 0 && n_rw_rep > 0 && n_full_drop > 0 &&
        n_rw_drop > 0 && n_byp > 0 && n_sec > 0 && stat_hazard > 0 && n_contig > 0,
        "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

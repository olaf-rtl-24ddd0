// tb_olaf_engine_full: the engine at its default (paper) size: 770 queue
// segments of 24 beats, 8192 keys, 2048-entry worker table.
//
// With the output link stalled, one worker sends an update for each of 770
// segments back to back (must be accepted at one beat per cycle and fill
// the queue), 30 more segments (dropped: queue full), a second worker sends
// segments 0..99 with a similar reward (aggregated, except segment 0: it is
// already locked for departure at the head and, the queue being full, the
// new update is dropped), a third worker sends
// segments 100..109 with a much higher reward (replaced), and an ACK must
// report 770 queued updates, 770 active keys and the full flag.  Then the
// link is released: the 770 updates must leave in segment order, each in
// 24 consecutive cycles, with summed gradients and count 2 for segments
// 1..99, the replacing update for 100..109, the original otherwise; the
// counters must match, and the queue must end empty.
module tb_olaf_engine_full;
  import olaf_pkg::*;
  import tb_pkt_util::*;
  localparam int unsigned NSEG = 770, BLOCKS = 24;
  localparam logic [31:0] PS_IP = 32'h0A00_0001;
  logic clk = 1'b0, rst_n = 1'b0;
  always #2 clk = ~clk;                 // 250 MHz
  int checks = 0, failures = 0;

  logic              cfg_we = 0, cfg_valid = 0, cfg_reward_en = 1;
  logic [10:0]       cfg_idx = '0;
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

  olaf_engine dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [31:0] wip(input int w);
    return 32'h0A01_0000 | 32'(w + 2);
  endfunction

  // gradient of worker w, segment s, beat j, lane i: a small FP32 value
  function automatic logic [31:0] grad(input int w, input int s, input int j, input int i);
    logic [31:0] h;
    h = 32'(w * 7919 + s * 104729 + j * 131 + i * 17) * 32'h9E37_79B1;
    return {h[31], 8'(120 + h[3:0]), h[26:4]};
  endfunction

  task automatic send_update(input int w, input int s, input real reward);
    for (int j = 0; j < int'(BLOCKS); j++) begin
      logic [DATA_W-1:0] d;
      for (int i = 0; i < 16; i++) d[32*i +: 32] = grad(w, s, j, i);
      if (j == 0) begin
        d = hdr_beat(wip(w), PS_IP, 16'(5000 + w), 16'd7000, 16'(s), 8'd17, 16'h0800);
        d[32*REWARD_LANE +: 32] = tb_fp_util::r2f(reward);
      end
      if (j == int'(BLOCKS) - 1) d[32*15 +: 32] = 32'd1;
      s_up_tvalid = 1; s_up_tdata = d; s_up_tlast = (j == int'(BLOCKS) - 1);
      @(negedge clk);
      while (!s_up_tready) @(negedge clk);
      @(posedge clk); #1;
    end
    s_up_tvalid = 0;
  endtask

  // received ACK
  logic [DATA_W-1:0] ack_beat;
  int n_ack = 0;
  bit dn_first = 1;
  always @(negedge clk) if (rst_n && m_dn_tvalid && m_dn_tready) begin
    if (dn_first && m_dn_is_ack) begin ack_beat = m_dn_tdata; n_ack++; end
    dn_first = m_dn_tlast;
  end

  // departures
  int out_beat = 0, n_out = 0, first_cyc = 0, cyc = 0, seg = 0, cnt = 0;
  int w_exp;
  logic [31:0] rw;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && m_up_tvalid && m_up_tready) begin
    if (out_beat == 0) begin
      first_cyc = cyc;
      seg = int'(get_be(m_up_tdata, OFF_SEG_ID, 2));
      chk(seg == n_out, "departure order");
      w_exp = (seg >= 100 && seg < 110) ? 2 : 0;
      chk(get_be(m_up_tdata, OFF_IP_SRC, 4) == wip(w_exp), "header of the queued update");
    end else if (out_beat < int'(BLOCKS) - 1) begin
      for (int i = 0; i < 16; i += 5) begin
        logic [31:0] e;
        e = grad(w_exp, seg, out_beat, i);
        if (seg > 0 && seg < 100) e = tb_fp_util::fadd(e, grad(1, seg, out_beat, i));
        chk(m_up_tdata[32*i +: 32] == e, "gradient lane");
      end
    end else begin
      cnt = int'(m_up_tdata[32*15 +: 32]);
      chk(cnt == ((seg > 0 && seg < 100) ? 2 : 1), "aggregation count");
      chk(m_up_tlast && cyc - first_cyc == int'(BLOCKS) - 1, "update leaves in 24 cycles");
      n_out++;
    end
    out_beat = m_up_tlast ? 0 : out_beat + 1;
  end

  int t0;
  initial begin
    cfg_reward_thresh = tb_fp_util::r2f(4.0);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    for (int w = 0; w < 3; w++) begin
      cfg_we = 1; cfg_idx = 11'(wip(w)); cfg_valid = 1; cfg_ip = wip(w); cfg_cluster = 0;
      @(posedge clk); #1;
    end
    cfg_we = 0;

    t0 = cyc;
    for (int s = 0; s < int'(NSEG); s++) send_update(0, s, 10.0);
    chk(cyc - t0 == int'(NSEG * BLOCKS), "770 updates accepted at line rate");
    for (int s = int'(NSEG); s < int'(NSEG) + 30; s++) send_update(0, s, 10.0);
    for (int s = 0; s < 100; s++) send_update(1, s, 11.0);
    for (int s = 100; s < 110; s++) send_update(2, s, 20.0);
    repeat (20) @(posedge clk);
    chk(q_status.q_util == 24'(NSEG) && q_status.active == 16'(NSEG) && q_status.q_full,
        "queue status full");
    // ACK from the server to worker 0
    for (int j = 0; j < 2; j++) begin
      s_dn_tvalid = 1; s_dn_tlast = (j == 1);
      s_dn_tdata = (j == 0) ? hdr_beat(PS_IP, wip(0), 16'd7000, 16'd5000, 16'd0, 8'd17, 16'h0800)
                            : '0;
      @(negedge clk);
      while (!s_dn_tready) @(negedge clk);
      @(posedge clk); #1;
    end
    s_dn_tvalid = 0;
    repeat (20) @(posedge clk);
    chk(n_ack == 1 && get_be(ack_beat, OFF_QUTIL, 3) == NSEG &&
        get_be(ack_beat, OFF_ACTIVE, 2) == NSEG && get_be(ack_beat, OFF_QFULL, 1) == 1,
        "ACK carries queue status");

    #1;
    t0 = cyc;
    m_up_tready = 1;
    wait (n_out == int'(NSEG));
    chk(cyc - t0 <= int'(NSEG * BLOCKS) + 50, "queue drains at line rate");
    repeat (20) @(posedge clk);
    chk(stat_append == NSEG && stat_drop == 31 && stat_aggregate == 99 &&
        stat_replace == 10 && stat_depart == NSEG && stat_bypass == 0, "counters");
    chk(q_status.q_util == 0 && q_status.active == 0 && !q_status.q_full, "queue empty at end");
    $display("departed %0d updates, drain took %0d cycles", n_out, cyc - t0);
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

// tb_ack_status_embed: random packets of 1..3 beats, some marked as ACKs,
// each with its own random queue status, under random valid gaps and
// back-pressure.  Expected output: ACK first beats carry the status bytes
// at the fixed offsets (network order) and a zero UDP checksum, all other
// bytes and beats unchanged, tdest = Cluster_ID, is_ack flag per packet;
// one cycle latency when the output is ready.
module tb_ack_status_embed;
  import olaf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_ack = 0, n_oth = 0;

  logic s_tvalid = 0, s_tready, s_tlast = 0, m_tvalid, m_tready = 1, m_tlast, m_is_ack;
  logic [DATA_W-1:0] s_tdata = '0, m_tdata;
  pkt_meta_t s_tuser = '0;
  q_status_t s_status = '0;
  logic [CLUSTER_W-1:0] m_tdest;

  ack_status_embed dut (.*);

  typedef struct { logic [DATA_W-1:0] d; logic l; logic a; logic [15:0] c; } exp_t;
  exp_t q [$];
  bit bp = 0;

  always @(negedge clk) if (rst_n && m_tvalid && m_tready) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (m_tdata !== e.d || m_tlast !== e.l || m_is_ack !== e.a || m_tdest !== e.c) begin
      failures++;
      if (failures < 5) $display("mismatch at %0t", $time);
    end
  end

  always @(posedge clk) begin
    #2 m_tready = bp ? (($urandom % 3) != 0) : 1'b1;
  end

  // latency: with a ready output, a beat accepted at edge k appears at k+1
  logic acc_d = 0;
  always @(posedge clk) begin
    if (rst_n && acc_d && !bp) begin
      checks++;
      if (!m_tvalid) begin failures++; $display("latency error"); end
    end
    acc_d = s_tvalid && s_tready;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < 600; k++) begin
      int n;
      logic ack;
      q_status_t st;
      bp  = k >= 300;
      ack = ($urandom % 2) == 0;
      if (ack) n_ack++; else n_oth++;
      st  = q_status_t'({$urandom, $urandom});
      n   = 1 + $urandom % 3;
      for (int j = 0; j < n; j++) begin
        exp_t e;
        s_tvalid = 1;
        s_tdata  = {16{$urandom}};
        s_tlast  = (j == n - 1);
        s_tuser  = '0;
        s_tuser.is_ack = ack;
        s_tuser.is_update = !ack && $urandom % 2;
        s_tuser.cluster_id = 16'(k);
        s_status = (j == 0) ? st : q_status_t'({$urandom, $urandom});
        e.d = s_tdata; e.l = s_tlast; e.a = ack; e.c = 16'(k);
        if (ack && j == 0) begin
          e.d[8*44 +: 8] = st.q_util[23:16];
          e.d[8*45 +: 8] = st.q_util[15:8];
          e.d[8*46 +: 8] = st.q_util[7:0];
          e.d[8*47 +: 8] = st.active[15:8];
          e.d[8*48 +: 8] = st.active[7:0];
          e.d[8*49 +: 8] = {7'd0, st.q_full};
          e.d[8*40 +: 16] = '0;
        end
        @(negedge clk);
        while (!s_tready) @(negedge clk);
        q.push_back(e);
        @(posedge clk); #1;
        s_tvalid = 0;
        if ($urandom % 4 == 0) begin @(posedge clk); #1; end
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_ack == 0 || n_oth == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_update_identifier: programs a worker table, then sends packets from
// known workers to the parameter server, ACKs from the server to known
// workers, and other traffic (unknown source, wrong destination, not UDP,
// not IPv4), with random back-pressure.  Each output packet must be the
// input packet unchanged, and its side-band must match flags, Cluster_ID,
// Segment_ID, the 5-tuple hash and the key computed here from the headers.
module tb_update_identifier;
  import olaf_pkg::*;
  import tb_pkt_util::*;
  localparam int unsigned NTBL = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, cfg_valid = 0;
  logic [5:0] cfg_idx = '0;
  logic [31:0] cfg_ip = '0, cfg_ps_ip = 32'h0A00_0001;
  logic [15:0] cfg_cluster = '0;
  logic s_tvalid = 0, s_tready, s_tlast = 0, m_tvalid, m_tready = 0, m_tlast;
  logic [DATA_W-1:0] s_tdata = '0, m_tdata;
  pkt_meta_t m_tuser;

  update_identifier #(.NTBL(NTBL)) dut (.*);

  typedef struct { logic [DATA_W-1:0] d; logic l; pkt_meta_t m; bit first; } exp_t;
  exp_t q [$];
  int n_upd = 0, n_ack = 0, n_oth = 0;

  always @(negedge clk) if (rst_n && m_tvalid && m_tready) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (m_tdata !== e.d || m_tlast !== e.l || (e.first && m_tuser !== e.m)) begin
      failures++;
      if (failures < 5) $display("mismatch: meta %h exp %h", m_tuser, e.m);
    end
  end

  always @(posedge clk) begin
    #2 m_tready = ($urandom % 4) != 0;
  end

  // worker w has IP 10.1.0.(w+2), cluster w % 3
  function automatic logic [31:0] wip(input int w);
    return 32'h0A01_0000 | 32'(w + 2);
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int w = 0; w < 40; w++) begin
      cfg_we = 1; cfg_idx = 6'(wip(w)); cfg_valid = 1; cfg_ip = wip(w);
      cfg_cluster = 16'(w % 3);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int k = 0; k < 400; k++) begin
      int kind, w, n;
      logic [31:0] sip, dip;
      logic [15:0] sp, dp, seg, et;
      logic [7:0] pr;
      pkt_meta_t m;
      kind = $urandom % 4;
      w = $urandom % 40;
      sp = 16'($urandom); dp = 16'($urandom); seg = 16'($urandom % 1540);
      pr = 8'd17; et = 16'h0800;
      m = '0;
      case (kind)
        0, 1: begin sip = wip(w); dip = cfg_ps_ip; m.is_update = 1; m.cluster_id = 16'(w % 3); n_upd++; end
        2: begin sip = cfg_ps_ip; dip = wip(w); m.is_ack = 1; m.cluster_id = 16'(w % 3); n_ack++; end
        default: begin
          n_oth++;
          case ($urandom % 4)
            0: begin sip = 32'h0A01_0000 | 32'(50 + $urandom % 10); dip = cfg_ps_ip; end // unknown
            1: begin sip = wip(w); dip = 32'h0A00_0099; end                               // not to PS
            2: begin sip = wip(w); dip = cfg_ps_ip; pr = 8'd6; end                        // TCP
            default: begin sip = wip(w); dip = cfg_ps_ip; et = 16'h86DD; end              // not IPv4
          endcase
          // the table entry of an unknown source still gives a cluster value
          m.cluster_id = 16'((sip[5:0] >= 2 && sip[5:0] < 42) ? (int'(sip[5:0]) - 2) % 3 : 0);
        end
      endcase
      m.worker_id  = worker_crc(sip, dip, sp, dp, pr);
      m.segment_id = seg;
      m.key        = key_hash(m.cluster_id, seg);
      n = 1 + $urandom % 3;
      for (int j = 0; j < n; j++) begin
        exp_t e;
        s_tvalid = 1;
        s_tdata  = (j == 0) ? hdr_beat(sip, dip, sp, dp, seg, pr, et) : {16{$urandom}};
        s_tlast  = (j == n - 1);
        e.d = s_tdata; e.l = s_tlast; e.m = m; e.first = (j == 0);
        @(negedge clk);
        while (!s_tready) @(negedge clk);
        q.push_back(e);
        @(posedge clk); #1;
        s_tvalid = 0;
        if ($urandom % 3 == 0) begin @(posedge clk); #1; end
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_upd == 0 || n_ack == 0 || n_oth == 0) failures++;
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

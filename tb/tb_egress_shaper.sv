// tb_egress_shaper: a source that is always valid (with random data) feeds
// the shaper, and a sink that is always ready counts beats.  For several
// rate settings the measured rate over a long window must equal
// rate_num/rate_den of the clock rate (or full rate when num >= den) to
// within the burst allowance, data must pass unchanged and in order, and
// valid must never rise while the credit forbids it (rate 0 sends nothing).
module tb_egress_shaper;
  import olaf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] rate_num = 16'd1, rate_den = 16'd1;
  logic s_tvalid = 1, s_tready, s_tlast = 0, m_tvalid, m_tready = 1, m_tlast;
  logic [DATA_W-1:0] s_tdata, m_tdata;
  int unsigned seq = 0, got = 0;

  egress_shaper dut (.*);

  assign s_tdata = {16{32'(seq)}};

  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      checks++;
      if (m_tdata !== {16{32'(seq)}} || s_tready !== 1'b1) failures++;
      got++;
      seq++;
    end
  end

  task automatic measure(input int num, input int den);
    int unsigned g0, cyc, expct, lo, hi;
    rst_n = 0;
    rate_num = 16'(num); rate_den = 16'(den);
    @(posedge clk); #1;
    rst_n = 1;
    repeat (50) @(posedge clk);
    g0  = got;
    cyc = 4000;
    repeat (cyc) @(posedge clk);
    expct = (num >= den) ? cyc : (cyc * num) / den;
    lo = (expct > 2) ? expct - 2 : 0;
    hi = expct + 2;
    checks++;
    if (got - g0 < lo || got - g0 > hi) begin
      failures++;
      $display("rate %0d/%0d: %0d beats in %0d cycles, expected %0d", num, den, got - g0, cyc, expct);
    end
  endtask

  initial begin
    @(posedge clk); #1;
    measure(1, 1);
    measure(1, 2);
    measure(2, 3);
    measure(1, 4);
    measure(5, 4);
    measure(7, 10);
    measure(0, 3);
    for (int k = 0; k < 10; k++) begin
      int d;
      d = 1 + $urandom % 20;
      measure($urandom % (d + 1), d);
    end
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

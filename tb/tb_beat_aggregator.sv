// tb_beat_aggregator: drives random beat pairs, in merge and pass mode,
// with the first- and last-beat flags set at random, one pair per cycle,
// and checks every lane of the result against a reference model of the
// lane rules (header and reward lanes of beat 0 keep the queued value, the
// count lane of the last beat is an integer sum, other lanes are FP32 sums)
// and the latency of LATENCY cycles.
module tb_beat_aggregator;
  import olaf_pkg::*;
  localparam int unsigned LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, op_merge = 1'b0, first_beat = 1'b0, last_beat = 1'b0;
  logic [DATA_W-1:0] new_beat = '0, old_beat = '0, out_beat;
  logic [15:0] in_tag = '0, out_tag;
  logic out_valid;
  int checks = 0, failures = 0, cyc = 0;

  beat_aggregator #(.LATENCY(LAT), .TAG_W(16)) dut (.*);
  always #5 clk = ~clk;

  typedef struct { logic [DATA_W-1:0] beat; logic [15:0] tag; int t; } exp_t;
  exp_t q [$];

  function automatic logic [31:0] rnd_fp();
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(110 + ($urandom % 30));
    return r;
  endfunction

  function automatic logic [DATA_W-1:0] model(input logic m, input logic f,
                                              input logic l,
                                              input logic [DATA_W-1:0] nb,
                                              input logic [DATA_W-1:0] ob);
    logic [DATA_W-1:0] r;
    for (int i = 0; i < 16; i++) begin
      logic [31:0] n, o, v;
      n = nb[32*i +: 32];
      o = ob[32*i +: 32];
      if (!m)                 v = n;
      else if (f && i <= 13)  v = o;
      else if (l && i == 15)  v = o + n;
      else                    v = tb_fp_util::fadd(o, n);
      r[32*i +: 32] = v;
    end
    return r;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      exp_t e;
      e = q.pop_front();
      checks++;
      if (out_beat !== e.beat || out_tag !== e.tag) begin
        failures++;
        if (failures < 5) $display("mismatch tag %h/%h\n got %h\n exp %h", out_tag, e.tag, out_beat, e.beat);
      end
      checks++;
      if (cyc - e.t != int'(LAT)) begin
        failures++;
        $display("latency %0d", cyc - e.t);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      exp_t e;
      @(negedge clk);
      in_valid   = ($urandom % 8) != 0;
      op_merge   = ($urandom % 4) != 0;
      first_beat = ($urandom % 3) == 0;
      last_beat  = !first_beat && ($urandom % 2) == 0;
      for (int i = 0; i < 16; i++) begin
        new_beat[32*i +: 32] = rnd_fp();
        old_beat[32*i +: 32] = rnd_fp();
      end
      if (last_beat) begin
        new_beat[32*15 +: 32] = 32'($urandom % 100);
        old_beat[32*15 +: 32] = 32'($urandom % 100);
      end
      in_tag = 16'($urandom);
      if (in_valid) begin
        e.beat = model(op_merge, first_beat, last_beat, new_beat, old_beat);
        e.tag  = in_tag;
        e.t    = cyc;
        q.push_back(e);
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_reward_filter: random rewards (multiples of 1/4, exact in FP32) and
// thresholds; the decision is compared with the rule evaluated in real
// arithmetic: new - old > T -> replace, old - new > T -> drop, else
// aggregate; and with enable low the answer must always be aggregate.
module tb_reward_filter;
  import olaf_pkg::*;
  logic enable;
  logic [31:0] threshold, reward_new, reward_old;
  reward_dec_e decision;
  int checks = 0, failures = 0;
  int cnt [3] = '{0, 0, 0};

  reward_filter dut (.*);

  initial begin
    for (int i = 0; i < 3000; i++) begin
      real rn, ro, t;
      reward_dec_e e;
      rn = real'($signed($urandom % 1601) - 800) / 4.0;
      ro = (i % 3 == 0) ? rn + real'($signed($urandom % 41) - 20) / 4.0
                        : real'($signed($urandom % 1601) - 800) / 4.0;
      case ($urandom % 4)
        0: t = 0.0;
        1: t = 0.5;
        2: t = 5.0;
        default: t = 20.0;
      endcase
      enable     = (i % 10) != 0;
      reward_new = tb_fp_util::r2f(rn);
      reward_old = tb_fp_util::r2f(ro);
      threshold  = tb_fp_util::r2f(t);
      #1;
      if (!enable)            e = RW_AGGREGATE;
      else if (rn - ro > t)   e = RW_REPLACE;
      else if (ro - rn > t)   e = RW_DROP;
      else                    e = RW_AGGREGATE;
      checks++;
      cnt[int'(e)]++;
      if (decision !== e) begin
        failures++;
        if (failures < 5) $display("new %f old %f T %f: got %s exp %s", rn, ro, t, decision.name(), e.name());
      end
    end
    // every outcome must have been exercised
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (cnt[k] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

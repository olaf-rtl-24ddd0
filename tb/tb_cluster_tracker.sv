// tb_cluster_tracker: random pushes, replace-status updates and pops on a
// small key space (including push and pop of the same key in one cycle,
// and the two-update case) checked each cycle against a model that keeps,
// per key, a list of queue indices plus replace flag, worker and reward;
// the active-key counter is checked as well.
module tb_cluster_tracker;
  localparam int unsigned NK = 8, QW = 6, WW = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [2:0]    lk_key = '0, pop_key = '0;
  logic [1:0]    lk_count;
  logic [QW-1:0] lk_head_qidx, lk_new_qidx, push_qidx = '0;
  logic          lk_rflag, push = 0, set_rep = 0, set_rflag = 0, pop = 0;
  logic [WW-1:0] lk_worker, push_worker = '0, set_worker = '0;
  logic [31:0]   lk_reward, push_reward = '0, set_reward = '0;
  logic [15:0]   active;

  cluster_tracker #(.NKEYS(NK), .QIDX_W(QW), .WORKER_W(WW), .ACTIVE_W(16)) dut (
    .clk, .rst_n, .lk_key, .lk_count, .lk_head_qidx, .lk_new_qidx, .lk_rflag,
    .lk_worker, .lk_reward, .push, .push_key(lk_key), .push_qidx, .push_worker,
    .push_reward, .set_rep, .set_key(lk_key), .set_rflag, .set_worker,
    .set_reward, .pop, .pop_key, .active);

  int unsigned mq [NK][$];
  bit          mf [NK];
  int unsigned mw [NK];
  int unsigned mr [NK];
  int          n_two = 0, n_same = 0;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      int na;
      @(negedge clk);
      lk_key = 3'($urandom);
      #1;
      chk(lk_count == 2'(mq[lk_key].size()), "count");
      if (mq[lk_key].size() > 0) begin
        chk(lk_head_qidx == QW'(mq[lk_key][0]), "head qidx");
        chk(lk_new_qidx == QW'(mq[lk_key][$]), "newest qidx");
        chk(lk_rflag == mf[lk_key] && lk_worker == WW'(mw[lk_key]) &&
            lk_reward == mr[lk_key], "replace status");
      end else chk(lk_rflag == 1'b0, "flag clear when empty");
      na = 0;
      for (int i = 0; i < NK; i++) if (mq[i].size() > 0) na++;
      chk(active == 16'(na), "active count");
      // choose a pop
      pop = 1'b0;
      pop_key = 3'($urandom);
      if (mq[pop_key].size() > 0 && ($urandom % 3) == 0) pop = 1'b1;
      // choose push or set_rep on lk_key
      push = 1'b0; set_rep = 1'b0;
      if ((mq[lk_key].size() < 2 || (pop && pop_key == lk_key)) && ($urandom % 2) == 0) begin
        push = 1'b1;
        push_qidx = QW'($urandom);
        push_worker = WW'($urandom);
        push_reward = $urandom;
      end else if (mq[lk_key].size() > 0 && ($urandom % 2) == 0 &&
                   !(pop && pop_key == lk_key && mq[lk_key].size() == 1)) begin
        set_rep = 1'b1;
        set_rflag = 1'($urandom);
        set_worker = WW'($urandom);
        set_reward = $urandom;
      end
      @(posedge clk);
      if (pop) begin
        void'(mq[pop_key].pop_front());
        if (mq[pop_key].size() == 0 && !(push && lk_key == pop_key)) mf[pop_key] = 0;
      end
      if (push) begin
        if (pop && pop_key == lk_key) n_same++;
        mq[lk_key].push_back(push_qidx);
        if (mq[lk_key].size() == 2) n_two++;
        mf[lk_key] = 1; mw[lk_key] = push_worker; mr[lk_key] = push_reward;
      end
      if (set_rep) begin
        mf[lk_key] = set_rflag; mw[lk_key] = set_worker; mr[lk_key] = set_reward;
      end
    end
    chk(n_two > 0 && n_same > 0, "corner cases reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

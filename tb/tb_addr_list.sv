// tb_addr_list: exercises an initially full list (the free-segment list)
// and an initially empty one (the departure list) with random pops and
// appends, also in the same cycle, and compares head, count, empty/full
// and random reads by index with a queue model.
module tb_addr_list;
  localparam int unsigned DEPTH = 13, W = 9, STRIDE = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // list A: starts full with i*STRIDE; list B: starts empty
  logic pop_a = 0, app_a = 0, pop_b = 0, app_b = 0;
  logic [W-1:0] app_data_a = '0, app_data_b = '0, head_a, head_b, rdd_b;
  logic [3:0] hidx_a, hidx_b, aidx_a, aidx_b, ridx_b = '0;
  logic [4:0] cnt_a, cnt_b;
  logic e_a, f_a, e_b, f_b;
  logic [W-1:0] rdd_a;

  addr_list #(.DEPTH(DEPTH), .DATA_W(W), .INIT_FULL(1'b1), .INIT_STRIDE(STRIDE)) ua (
    .clk, .rst_n, .pop(pop_a), .head_data(head_a), .head_idx(hidx_a),
    .append(app_a), .append_data(app_data_a), .append_idx(aidx_a),
    .rd_idx(4'd0), .rd_idx_data(rdd_a), .count(cnt_a), .empty(e_a), .full(f_a));
  addr_list #(.DEPTH(DEPTH), .DATA_W(W), .INIT_FULL(1'b0), .INIT_STRIDE(STRIDE)) ub (
    .clk, .rst_n, .pop(pop_b), .head_data(head_b), .head_idx(hidx_b),
    .append(app_b), .append_data(app_data_b), .append_idx(aidx_b),
    .rd_idx(ridx_b), .rd_idx_data(rdd_b), .count(cnt_b), .empty(e_b), .full(f_b));

  logic [W-1:0] ma [$], mb [$];
  int hb = 0;    // model index of B's head

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int i = 0; i < DEPTH; i++) ma.push_back(W'(i * STRIDE));
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      chk(cnt_a == 5'(ma.size()) && e_a == (ma.size() == 0) && f_a == (ma.size() == DEPTH), "A count");
      chk(cnt_b == 5'(mb.size()) && e_b == (mb.size() == 0) && f_b == (mb.size() == DEPTH), "B count");
      if (ma.size() > 0) chk(head_a == ma[0], "A head");
      if (mb.size() > 0) begin
        int j;
        chk(head_b == mb[0], "B head");
        chk(hidx_b == 4'(hb), "B head index");
        j = $urandom % mb.size();
        ridx_b = 4'((hb + j) % DEPTH);
        #1 chk(rdd_b == mb[j], "B read by index");
      end
      chk(aidx_b == 4'((hb + mb.size()) % DEPTH), "B append index");
      // move entries from A to B and back, as the queue does
      pop_a = ma.size() > 0 && mb.size() < DEPTH && ($urandom % 3) != 0;
      app_b = pop_a;
      app_data_b = head_a;
      pop_b = mb.size() > 0 && ($urandom % 3) != 0;
      app_a = pop_b;
      app_data_a = head_b;
      @(posedge clk);
      if (pop_a) void'(ma.pop_front());
      if (app_b) mb.push_back(app_data_b);
      if (pop_b) begin void'(mb.pop_front()); hb = (hb + 1) % DEPTH; end
      if (app_a) ma.push_back(app_data_a);
    end
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

// cluster_tracker: per-key bookkeeping of the updates held in the queue.
//
// A key is a Cluster_ID, or with segmented models a hash of Cluster_ID and
// Segment_ID.  For every key the tracker holds
//   * cluster_status: three columns of queue indices (positions in
//     out_mem_addrs), addressed by the circular pointers cluster_head and
//     cluster_tail (modulo 3).  head == tail means no update of the key is
//     queued.  At most two updates of a key can be queued: a second one is
//     appended only while the first is locked for departure at the queue
//     head, which is why three columns are needed to tell full from empty;
//   * replace_status: a replace flag and the Worker_ID of the newest queued
//     update; the flag is set while that update is a single, unaggregated
//     update, which the same worker may replace;
//   * the mean reward of the newest queued update (for the reward filter).
// It also counts the keys that have an update queued (the number of active
// clusters reported to the workers).
// The three columns, head/tail pointers and replace flag + Worker_ID follow
// the paper; keeping the reward here and the counter are this design's.
//
// Interface: lookup is combinational on lk_key.  push (append a queue index
// for a key), set_rep (rewrite replace_status and reward of a key) and pop
// (remove the oldest update of a key) act at the clock edge; push and pop
// may name the same key in one cycle, push and set_rep may not.
module cluster_tracker #(
  parameter int unsigned NKEYS    = 8192,
  parameter int unsigned QIDX_W   = 10,
  parameter int unsigned WORKER_W = 16,
  parameter int unsigned ACTIVE_W = 16,
  localparam int unsigned KEY_W   = (NKEYS > 1) ? $clog2(NKEYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // lookup
  input  logic [KEY_W-1:0]    lk_key,
  output logic [1:0]          lk_count,      // 0, 1 or 2 queued updates
  output logic [QIDX_W-1:0]   lk_head_qidx,  // oldest
  output logic [QIDX_W-1:0]   lk_new_qidx,   // newest
  output logic                lk_rflag,
  output logic [WORKER_W-1:0] lk_worker,
  output logic [31:0]         lk_reward,
  // append an update
  input  logic                push,
  input  logic [KEY_W-1:0]    push_key,
  input  logic [QIDX_W-1:0]   push_qidx,
  input  logic [WORKER_W-1:0] push_worker,
  input  logic [31:0]         push_reward,
  // aggregate / replace into the newest update
  input  logic                set_rep,
  input  logic [KEY_W-1:0]    set_key,
  input  logic                set_rflag,
  input  logic [WORKER_W-1:0] set_worker,
  input  logic [31:0]         set_reward,
  // departure of the oldest update
  input  logic                pop,
  input  logic [KEY_W-1:0]    pop_key,
  // number of keys with a queued update
  output logic [ACTIVE_W-1:0] active
);
  // Pointers and flags are flops cleared by reset.  Queue indices, Worker_ID
  // and reward are memories without reset: they are only read while the
  // key has an update queued (status) or its flag is set (worker, reward).
  // Column c of key k is status word {k, c}.
  logic [NKEYS-1:0][1:0] head;
  logic [NKEYS-1:0][1:0] tail;
  logic [NKEYS-1:0]      rflag;
  logic [QIDX_W-1:0]     status [4*NKEYS];
  logic [WORKER_W-1:0]   worker [NKEYS];
  logic [31:0]           reward [NKEYS];

  function automatic logic [1:0] inc3(input logic [1:0] p);
    return (p == 2'd2) ? 2'd0 : p + 2'd1;
  endfunction
  function automatic logic [1:0] dec3(input logic [1:0] p);
    return (p == 2'd0) ? 2'd2 : p - 2'd1;
  endfunction
  function automatic logic [1:0] cnt3(input logic [1:0] h, input logic [1:0] t);
    return (t >= h) ? t - h : t + 2'd3 - h;
  endfunction

  always_comb begin
    lk_count     = cnt3(head[lk_key], tail[lk_key]);
    lk_head_qidx = status[{lk_key, head[lk_key]}];
    lk_new_qidx  = status[{lk_key, dec3(tail[lk_key])}];
    lk_rflag     = rflag[lk_key];
    lk_worker    = worker[lk_key];
    lk_reward    = reward[lk_key];
  end

  logic push_to_empty, pop_to_empty;
  always_comb begin
    push_to_empty = push && head[push_key] == tail[push_key] &&
                    !(pop && pop_key == push_key);
    pop_to_empty  = pop && cnt3(head[pop_key], tail[pop_key]) == 2'd1 &&
                    !(push && push_key == pop_key);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0;
      head   <= '0;
      tail   <= '0;
      rflag  <= '0;
    end else begin
      if (set_rep) rflag[set_key] <= set_rflag;
      if (pop) begin
        head[pop_key] <= inc3(head[pop_key]);
        if (pop_to_empty) rflag[pop_key] <= 1'b0;
      end
      if (push) begin
        tail[push_key]  <= inc3(tail[push_key]);
        rflag[push_key] <= 1'b1;
      end
      active <= active + ACTIVE_W'(push_to_empty) - ACTIVE_W'(pop_to_empty);
    end
  end

  // push and set_rep never occur together, so each memory has one write.
  always_ff @(posedge clk) begin
    if (push) status[{push_key, tail[push_key]}] <= push_qidx;
    if (push || set_rep) begin
      worker[push ? push_key : set_key] <= push ? push_worker : set_worker;
      reward[push ? push_key : set_key] <= push ? push_reward : set_reward;
    end
  end

  a_push_room: assert property (@(posedge clk) disable iff (!rst_n)
                               push |-> (cnt3(head[push_key], tail[push_key]) < 2'd2 ||
                                         (pop && pop_key == push_key)))
    else $error("cluster_tracker: third update for one key");
  a_pop_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
                                  pop |-> head[pop_key] != tail[pop_key])
    else $error("cluster_tracker: pop of a key with no update");
  a_push_set_excl: assert property (@(posedge clk) disable iff (!rst_n) !(push && set_rep))
    else $error("cluster_tracker: push and set_rep in one cycle");
endmodule

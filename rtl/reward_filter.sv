// reward_filter: decides, from the mean rewards, what happens to an update
// that meets a queued update of the same key.
//
// Following the paper's convergence-preserving rule: if the two rewards
// differ by at most the threshold the gradients are aggregated; if the
// arriving reward is higher by more than the threshold the arriving update
// replaces the queued one; if it is lower by more than the threshold the
// arriving update is dropped.  Rewards and threshold are FP32; the bounds
// old + T and old - T are formed with the package's combinational FP32
// adder.  With enable = 0 the filter always answers "aggregate".
// The threshold value, its FP32 encoding and the enable bit are this
// design's choices (the paper gives no number).  Purely combinational.
module reward_filter
  import olaf_pkg::*;
(
  input  logic        enable,
  input  logic [31:0] threshold,   // FP32, >= 0
  input  logic [31:0] reward_new,  // FP32
  input  logic [31:0] reward_old,  // FP32
  output reward_dec_e decision
);
  logic [31:0] upper, lower;

  always_comb begin
    upper = fp32_add_f(reward_old, threshold);
    lower = fp32_add_f(reward_old, {~threshold[31], threshold[30:0]});
    if (!enable)                          decision = RW_AGGREGATE;
    else if (fp32_gt(reward_new, upper))  decision = RW_REPLACE;
    else if (fp32_gt(lower, reward_new))  decision = RW_DROP;
    else                                  decision = RW_AGGREGATE;
  end
endmodule

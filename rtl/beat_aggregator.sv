// beat_aggregator: merges one arriving 512-bit beat into the queued beat of
// the same position in a segment, or passes the arriving beat unchanged.
//
// The beat is split into 16 lanes of 32 bits, each with its own pipelined
// FP32 adder (fp32_adder), so a whole beat is merged per clock cycle as in
// the paper.  With op_merge = 1 the lanes combine as follows:
//   * beat 0, lanes 0..12 (packet headers): the queued lanes are kept;
//   * beat 0, lane 13 (mean reward): the queued reward is kept;
//   * last beat, lane 15 (aggregation count): unsigned integer sum;
//   * every other lane (gradients): FP32 sum.
// With op_merge = 0 (append or replace) the arriving beat is passed on.
// The paper sums gradients with FP32 adders and records in the packet how
// many worker gradients are combined; this design therefore keeps the sum
// (the receiver divides by the count to average).  Which reward an
// aggregate carries is not given in the paper; keeping the queued one is
// this design's choice.
//
// Timing: inputs are taken when in_valid is high; the result and the
// unchanged tag (the memory address to write) appear LATENCY cycles later
// with out_valid.  There is no back-pressure: the pipeline always advances.
module beat_aggregator
  import olaf_pkg::*;
#(
  parameter int unsigned LATENCY = 3,
  parameter int unsigned TAG_W   = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              op_merge,   // 1: merge, 0: pass arriving beat
  input  logic              first_beat, // beat 0 of the segment
  input  logic              last_beat,  // last beat of the segment
  input  logic [DATA_W-1:0] new_beat,   // arriving update
  input  logic [DATA_W-1:0] old_beat,   // queued update
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [DATA_W-1:0] out_beat,
  output logic [TAG_W-1:0]  out_tag
);
  typedef enum logic [1:0] {L_ADD, L_KEEP_OLD, L_INT_ADD, L_NEW} lane_op_e;

  lane_op_e    op_in  [LANES];
  lane_op_e    op_out [LANES];
  logic [31:0] int_in [LANES];
  logic [31:0] int_out[LANES];
  logic [31:0] old_in [LANES];
  logic [31:0] new_in [LANES];
  logic [31:0] fsum   [LANES];
  logic        fvalid [LANES];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      old_in[i] = old_beat[LANE_W*i +: LANE_W];
      new_in[i] = new_beat[LANE_W*i +: LANE_W];
      if (!op_merge)                                        op_in[i] = L_NEW;
      else if (first_beat && i < int'(HDR_LANES))           op_in[i] = L_KEEP_OLD;
      else if (first_beat && i == int'(REWARD_LANE))        op_in[i] = L_KEEP_OLD;
      else if (last_beat && i == int'(LANES) - 1)           op_in[i] = L_INT_ADD;
      else                                                  op_in[i] = L_ADD;
      case (op_in[i])
        L_KEEP_OLD: int_in[i] = old_in[i];
        L_INT_ADD:  int_in[i] = old_in[i] + new_in[i];
        default:    int_in[i] = new_in[i];
      endcase
    end
  end

  // Lanes that are not FP32-summed travel in a delay line matched to the
  // adder latency.
  logic [31:0] dl_d  [LATENCY][LANES];
  lane_op_e    dl_op [LATENCY][LANES];
  logic [TAG_W-1:0] dl_tag [LATENCY];
  logic             dl_v   [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(LATENCY); s++) begin
        dl_v[s]   <= 1'b0;
        dl_tag[s] <= '0;
        for (int i = 0; i < LANES; i++) begin
          dl_d[s][i]  <= '0;
          dl_op[s][i] <= L_NEW;
        end
      end
    end else begin
      dl_v[0]   <= in_valid;
      dl_tag[0] <= in_tag;
      for (int i = 0; i < LANES; i++) begin
        dl_d[0][i]  <= int_in[i];
        dl_op[0][i] <= op_in[i];
      end
      for (int s = 1; s < int'(LATENCY); s++) begin
        dl_v[s]   <= dl_v[s-1];
        dl_tag[s] <= dl_tag[s-1];
        for (int i = 0; i < LANES; i++) begin
          dl_d[s][i]  <= dl_d[s-1][i];
          dl_op[s][i] <= dl_op[s-1][i];
        end
      end
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    fp32_adder #(.LATENCY(LATENCY)) u_add (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .a        (old_in[i]),
      .b        (new_in[i]),
      .out_valid(fvalid[i]),
      .sum      (fsum[i])
    );
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      op_out[i]  = dl_op[LATENCY-1][i];
      int_out[i] = dl_d[LATENCY-1][i];
      out_beat[LANE_W*i +: LANE_W] = (op_out[i] == L_ADD) ? fsum[i] : int_out[i];
    end
  end

  assign out_valid = dl_v[LATENCY-1];
  assign out_tag   = dl_tag[LATENCY-1];

  // The adders' valid bits must track the delay line.
  a_adder_in_step: assert property (@(posedge clk) disable iff (!rst_n)
                                    fvalid[0] == dl_v[LATENCY-1])
    else $error("beat_aggregator: adder pipeline out of step");
endmodule

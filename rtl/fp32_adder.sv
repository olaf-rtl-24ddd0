// fp32_adder: pipelined single-precision adder, one per 32-bit lane.
//
// The aggregation datapath sums gradients with one FP32 adder per lane of a
// 512-bit beat (16 adders), as in the paper.  This adder takes one pair of
// operands per cycle and delivers the sum LATENCY cycles later (a valid bit
// travels with the data).  The arithmetic is olaf_pkg::fp32_add_f: round to
// nearest even, subnormals flushed to zero, Inf/NaN propagated.  The
// addition is computed after the input register and followed by
// LATENCY-1 output registers that a synthesis tool is expected to retime
// into the adder; the paper does not give the adder's latency or internal
// stages, so LATENCY = 3 is this design's choice.
module fp32_adder #(
  parameter int unsigned LATENCY = 3      // >= 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] sum
);
  logic [31:0] a_q, b_q;
  logic        v_q;
  logic [31:0] pipe_d [LATENCY];
  logic        pipe_v [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      a_q <= '0;
      b_q <= '0;
    end else begin
      v_q <= in_valid;
      a_q <= a;
      b_q <= b;
    end
  end

  // Stage 0 is the input register above; stages 1..LATENCY-1 follow.
  always_comb begin
    pipe_d[0] = olaf_pkg::fp32_add_f(a_q, b_q);
    pipe_v[0] = v_q;
  end

  for (genvar s = 1; s < LATENCY; s++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pipe_v[s] <= 1'b0;
        pipe_d[s] <= '0;
      end else begin
        pipe_v[s] <= pipe_v[s-1];
        pipe_d[s] <= pipe_d[s-1];
      end
    end
  end

  assign out_valid = pipe_v[LATENCY-1];
  assign sum       = pipe_d[LATENCY-1];
endmodule

// egress_shaper: sets the rate of the bottleneck output link.
//
// The paper varies the accelerator's outgoing rate to create a given load
// factor (input rate / output rate).  This block lets a beat through only
// when a credit counter allows it: every cycle the counter gains rate_num,
// a beat costs rate_den, so the long-run rate is rate_num/rate_den of the
// line rate (rate_num >= rate_den gives full rate).  The counter saturates
// at 2*rate_den, which bounds bursts to two beats above the average.  The
// credit scheme is this design's choice; the paper only says the output
// rate was varied.  Combinational valid/ready gating, no added latency.
// m_tdata and m_tlast are wires from s_tdata and s_tlast: the block holds
// no data, so synthesis sees no logic behind those outputs.
module egress_shaper
  import olaf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [15:0]       rate_num,
  input  logic [15:0]       rate_den,   // > 0
  input  logic              s_tvalid,
  output logic              s_tready,
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tlast,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tlast
);
  logic [17:0] credit, next;
  logic        ok, fire;

  assign ok       = credit >= 18'(rate_den);
  assign m_tvalid = s_tvalid && ok;
  assign s_tready = m_tready && ok;
  assign m_tdata  = s_tdata;
  assign m_tlast  = s_tlast;
  assign fire     = m_tvalid && m_tready;

  always_comb begin
    next = credit + 18'(rate_num) - (fire ? 18'(rate_den) : 18'd0);
    if (next > 18'(rate_den) * 2) next = 18'(rate_den) * 2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credit <= '0;
    else        credit <= next;
  end
endmodule

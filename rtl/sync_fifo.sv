// sync_fifo: small synchronous first-in first-out buffer (helper).
//
// DEPTH entries of WIDTH bits, first-word fall-through: rd_data shows the
// oldest entry while empty is low.  wr_en and rd_en act at the clock edge
// and may be high in the same cycle.  Writing while full or reading while
// empty is a protocol error (asserted).  count gives the occupancy.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [PTR_W:0]   count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] wp, rp;

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (wr_en) wp <= inc(wp);
      if (rd_en) rp <= inc(rp);
      count <= count + (PTR_W+1)'(wr_en) - (PTR_W+1)'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  assign rd_data = mem[rp];
  assign empty   = (count == '0);
  assign full    = (count == (PTR_W+1)'(DEPTH));

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en))
    else $error("sync_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("sync_fifo: read while empty");
endmodule

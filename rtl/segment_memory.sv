// segment_memory: payload storage of the queue.
//
// The memory is divided into NSEG segments of BLOCKS consecutive blocks;
// each block holds one 512-bit AXI beat, so a segment holds one update of up
// to BLOCKS*64 bytes (24 blocks for a 1500-byte packet, as in the paper).
// The array has one write port and two read ports: port A is read by the
// dequeue logic, port B by the aggregation logic, which reads the queued
// beat, adds the arriving beat and writes the sum back.  Reads are
// synchronous (data one cycle after the address), as in FPGA block/ultra
// RAM, where the paper places the payload.  A write and a read of the same
// address in one cycle return the old data.  Two read ports are this
// design's choice (on an FPGA: two copies, or a double-pumped port).
module segment_memory #(
  parameter int unsigned NSEG   = 770,
  parameter int unsigned BLOCKS = 24,
  parameter int unsigned DATA_W = 512,
  localparam int unsigned WORDS = NSEG * BLOCKS,
  localparam int unsigned ADDR_W = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re_a,
  input  logic [ADDR_W-1:0] raddr_a,
  output logic [DATA_W-1:0] rdata_a,
  input  logic              re_b,
  input  logic [ADDR_W-1:0] raddr_b,
  output logic [DATA_W-1:0] rdata_b
);
  logic [DATA_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end
  always_ff @(posedge clk) begin
    if (re_a) rdata_a <= mem[raddr_a];
  end
  always_ff @(posedge clk) begin
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule

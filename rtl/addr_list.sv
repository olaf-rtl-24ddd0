// addr_list: circular list of segment addresses with a read pointer and an
// append pointer, as used twice by the queue.
//
//   available_mem_addrs: the free segments.  The queue takes the entry at
//     the read pointer (write_ptr in the paper) for an arriving update and
//     appends a segment again (append_available_addr) once it has been sent.
//   out_mem_addrs: the queued updates in departure order.  An arriving
//     update's segment is appended (append_out_addr) and the head is read
//     (read_ptr) to send it.  Here each entry also holds the update's key,
//     so the departing update can be removed from the per-cluster tracking.
//
// Both pointers wrap around DEPTH.  The position of an entry (the "queue
// index") stays valid until the entry is read, so other tables may point to
// it; rd_idx/rd_idx_data give random read access by index.  With
// INIT_FULL = 1 reset fills the list with block addresses i*INIT_STRIDE
// (segment i starts at block i*INIT_STRIDE), otherwise it starts empty.
// next_data is the entry behind the head (valid when count >= 2).
// Reads are combinational; pop and append take effect at the clock edge and
// may happen in the same cycle.  Popping an empty or appending to a full
// list is a protocol error (asserted).
module addr_list #(
  parameter int unsigned DEPTH       = 770,
  parameter int unsigned DATA_W      = 15,
  parameter bit          INIT_FULL   = 1'b0,
  parameter int unsigned INIT_STRIDE = 24,
  localparam int unsigned IDX_W      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // head
  input  logic              pop,
  output logic [DATA_W-1:0] head_data,
  output logic [IDX_W-1:0]  head_idx,
  output logic [DATA_W-1:0] next_data,    // entry after the head
  // tail
  input  logic              append,
  input  logic [DATA_W-1:0] append_data,
  output logic [IDX_W-1:0]  append_idx,   // index the next append will use
  // random read by queue index
  input  logic [IDX_W-1:0]  rd_idx,
  output logic [DATA_W-1:0] rd_idx_data,
  // occupancy
  output logic [IDX_W:0]    count,
  output logic              empty,
  output logic              full
);
  logic [DATA_W-1:0] mem [DEPTH];
  logic [IDX_W-1:0]  rd_ptr, app_ptr;
  logic              wrapped;     // every position written at least once

  function automatic logic [IDX_W-1:0] inc(input logic [IDX_W-1:0] p);
    return (p == IDX_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr  <= '0;
      app_ptr <= '0;
      count   <= INIT_FULL ? (IDX_W+1)'(DEPTH) : '0;
      wrapped <= 1'b0;
    end else begin
      if (pop)    rd_ptr  <= inc(rd_ptr);
      if (append) begin
        app_ptr <= inc(app_ptr);
        if (app_ptr == IDX_W'(DEPTH - 1)) wrapped <= 1'b1;
      end
      count <= count + (IDX_W+1)'(append) - (IDX_W+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (append) mem[app_ptr] <= append_data;
  end

  function automatic logic [DATA_W-1:0] rd(input logic [IDX_W-1:0] p);
    if (INIT_FULL && !wrapped && p >= app_ptr)
      return DATA_W'(32'(p) * INIT_STRIDE);
    return mem[p];
  endfunction

  assign head_data   = rd(rd_ptr);
  assign head_idx    = rd_ptr;
  assign next_data   = rd(inc(rd_ptr));
  assign append_idx  = app_ptr;
  assign rd_idx_data = rd(rd_idx);
  assign empty       = (count == '0);
  assign full        = (count == (IDX_W+1)'(DEPTH));

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("addr_list: pop from empty list");
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) append |-> (!full || pop))
    else $error("addr_list: append to full list");
endmodule

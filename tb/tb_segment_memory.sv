// tb_segment_memory: writes random beats to random addresses of a small
// memory and reads them back through both read ports, checking the
// one-cycle read latency, independent ports and read-before-write on a
// same-address collision.
module tb_segment_memory;
  localparam int unsigned NSEG = 5, BLOCKS = 4, DW = 64, WORDS = NSEG * BLOCKS;
  logic clk = 1'b0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic we = 0, re_a = 0, re_b = 0;
  logic [4:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [DW-1:0] wdata = '0, rdata_a, rdata_b;
  logic [DW-1:0] model [WORDS];

  segment_memory #(.NSEG(NSEG), .BLOCKS(BLOCKS), .DATA_W(DW)) dut (.*);

  initial begin
    // fill
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      we = 1; waddr = 5'(i); wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int k = 0; k < 500; k++) begin
      logic [DW-1:0] ea, eb;
      @(negedge clk);
      re_a = 1; re_b = 1;
      raddr_a = 5'($urandom % WORDS);
      raddr_b = 5'($urandom % WORDS);
      we = ($urandom % 2) == 0;
      waddr = (k % 5 == 0) ? raddr_a : 5'($urandom % WORDS);
      wdata = {$urandom, $urandom};
      ea = model[raddr_a];
      eb = model[raddr_b];
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0; re_a = 0; re_b = 0;
      checks += 2;
      if (rdata_a !== ea) failures++;
      if (rdata_b !== eb) failures++;
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

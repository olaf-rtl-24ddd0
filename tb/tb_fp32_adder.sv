// tb_fp32_adder: checks the pipelined FP32 adder against the simulator's
// own floating-point addition, rounded to single precision.
// Random normal operands (exponents kept away from the subnormal range),
// opposite signs for cancellation, zeros and infinities; one operation per
// cycle; the sum must arrive exactly LATENCY cycles after its operands.
module tb_fp32_adder;
  localparam int unsigned LAT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, out_valid;
  logic [31:0] a = '0, b = '0, sum;
  int checks = 0, failures = 0;

  fp32_adder #(.LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [31:0] rnd_fp();
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(100 + ($urandom % 56));      // exponent 100..155
    return r;
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] x, input logic [31:0] y);
    if (x[30:23] == 8'hFF) return x;            // only Inf operands are used
    return tb_fp_util::fadd(x, y);
  endfunction

  logic [31:0] exp_q [$];
  int cyc = 0, issued_at [$];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      logic [31:0] e;
      int t;
      e = exp_q.pop_front();
      t = issued_at.pop_front();
      checks++;
      if (sum !== e) begin
        failures++;
        if (failures < 10) $display("mismatch: got %h expected %h", sum, e);
      end
      checks++;
      if (cyc - t != int'(LAT)) begin
        failures++;
        $display("latency %0d, expected %0d", cyc - t, LAT);
      end
    end
  end

  task automatic drive(input logic [31:0] x, input logic [31:0] y);
    @(negedge clk);
    a = x; b = y; in_valid = 1'b1;
    exp_q.push_back(ref_add(x, y));
    issued_at.push_back(cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed cases
    drive(32'h3F80_0000, 32'h3F80_0000);          // 1 + 1 = 2
    drive(32'h3F80_0000, 32'hBF80_0000);          // 1 - 1 = 0
    drive(32'h4049_0FDB, 32'h0000_0000);          // pi + 0
    drive(32'h7F80_0000, 32'h3F80_0000);          // inf + 1
    drive(32'h3F80_0000, 32'h3380_0000);          // 1 + 2^-24 (tie, even)
    drive(32'h3F80_0001, 32'h3380_0000);          // tie, round up
    drive(32'h4B80_0000, 32'hBF80_0000);          // 2^24 - 1
    for (int i = 0; i < 4000; i++) begin
      logic [31:0] x, y;
      x = rnd_fp();
      y = rnd_fp();
      if (i % 4 == 1) y = {~x[31], x[30:23], 23'($urandom)};   // cancellation
      if (i % 4 == 2) y[30:23] = x[30:23] - 8'($urandom % 30);
      drive(x, y);
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

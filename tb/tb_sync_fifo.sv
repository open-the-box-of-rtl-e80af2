// tb_sync_fifo -- self-checking test of the FIFO: random push/pop traffic
// against a queue model, checking data order, full/empty/count and that a
// push when full and a pop when empty are ignored.
`timescale 1ns/1ps
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [31:0] wdata, rdata;
  logic [4:0] count;
  int checks = 0, failures = 0, fulls = 0;

  sync_fifo #(.WIDTH(32), .DEPTH(16)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", what, got, exp);
    end
  endtask

  logic [31:0] q [$];

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int bias;
      bias = (n / 500) % 2 == 0 ? 3 : 1;   // phases that fill and that drain
      @(negedge clk);
      push = ($urandom_range(3) < bias); pop = ($urandom_range(3) >= bias);
      wdata = $urandom;
      chk("count", int'(count), q.size());
      chk("empty", int'(empty), int'(q.size() == 0));
      chk("full", int'(full), int'(q.size() == 16));
      if (q.size() != 0) chk("head", int'(rdata), int'(q[0]));
      if (full) fulls++;
      @(posedge clk);
      begin
        bit was_full;
        was_full = (q.size() == 16);
        if (pop && q.size() != 0) void'(q.pop_front());
        if (push && !was_full) q.push_back(wdata);
      end
    end
    chk("reached full", int'(fulls > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

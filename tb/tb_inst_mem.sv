// tb_inst_mem -- self-checking test of the controller's instruction memory:
// writes a pattern over the whole 8K-word array, reads it back in random
// order and checks the one-cycle read latency.
`timescale 1ns/1ps
module tb_inst_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [12:0] addr;
  logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;

  inst_mem dut (.*);

  function automatic logic [31:0] pat(input int a);
    return 32'(a) * 32'h9E37_79B9 ^ 32'h1234_5678;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int a = 0; a < 8192; a++) begin
      @(negedge clk); en = 1; we = 1; addr = 13'(a); wdata = pat(a);
    end
    for (int n = 0; n < 3000; n++) begin
      int a;
      a = $urandom_range(8191);
      @(negedge clk); en = 1; we = 0; addr = 13'(a);
      @(negedge clk); en = 0; addr = 13'($urandom);
      checks++;
      if (rdata !== pat(a)) begin
        failures++;
        if (failures < 10) $display("FAIL %0d got %h exp %h", a, rdata, pat(a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

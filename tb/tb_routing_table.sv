// tb_routing_table -- self-checking test of the event routing table: random
// entries are written, random events looked up, and hit, destination and
// translated neuron address compared with a model of the table.
`timescale 1ns/1ps
module tb_routing_table;
  import seneca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we, hit;
  logic [5:0] widx;
  logic [31:0] wdata;
  aer_t ev;
  flit_t pkt;
  int checks = 0, failures = 0;
  logic [24:0] model [64];

  routing_table dut (.*);

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
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    we = 0; widx = 0; wdata = 0; ev = '0;
    for (int i = 0; i < 64; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = ($urandom_range(3) == 0); widx = 6'($urandom); wdata = $urandom;
      ev.addr = 16'($urandom); ev.value = 16'($urandom);
      #1;
      chk("hit", int'(hit), int'(model[ev.addr[15:10]][24]));
      if (model[ev.addr[15:10]][24]) begin
        chk("dx", int'(pkt.dx), int'(model[ev.addr[15:10]][23:20]));
        chk("dy", int'(pkt.dy), int'(model[ev.addr[15:10]][19:16]));
        chk("addr", int'(pkt.ev.addr), int'(16'(model[ev.addr[15:10]][15:0] + ev.addr[9:0])));
        chk("value", int'(pkt.ev.value), int'(ev.value));
      end
      @(posedge clk);
      if (we) model[widx] = wdata[24:0];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

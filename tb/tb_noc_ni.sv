// tb_noc_ni -- self-checking test of the core's NoC interface.
//
// Routing entries are written; events pushed by the "controller" must leave
// the local router port as packets with the looked-up destination and
// translated address, in order, under random back-pressure; events whose
// entry is invalid must be dropped (and counted). Packets arriving from the
// router must be popped by the controller in order, and in_ready must fall
// when the receive FIFO is full.
`timescale 1ns/1ps
module tb_noc_ni;
  import seneca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tx_push, tx_full, rx_pop, rx_empty, rt_we, dropped;
  aer_t tx_data, rx_data;
  logic [5:0] rt_widx;
  logic [31:0] rt_wdata;
  logic out_valid, out_ready, in_valid, in_ready;
  flit_t out_flit, in_flit;
  int checks = 0, failures = 0, drops = 0;

  noc_ni dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  flit_t exp_q [$];
  always @(posedge clk) if (rst_n) begin
    if (dropped) drops++;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_flit !== exp_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL out %h exp %h", out_flit, exp_q.size() ? exp_q[0] : '0);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
  end
  always @(negedge clk) out_ready = 1'($urandom);

  initial begin
    int exp_drops;
    tx_push = 0; tx_data = '0; rx_pop = 0; rt_we = 0; rt_widx = 0; rt_wdata = 0;
    in_valid = 0; in_flit = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // entries 0..31 valid, 32..63 invalid
    for (int e = 0; e < 32; e++) begin
      @(negedge clk); rt_we = 1; rt_widx = 6'(e);
      rt_wdata = {7'd0, 1'b1, 4'(e % 3), 4'(e % 5), 16'(e * 100)};
    end
    @(negedge clk); rt_we = 0;
    exp_drops = 0;
    for (int n = 0; n < 500; n++) begin
      aer_t ev;
      ev.addr = 16'($urandom); ev.value = 16'($urandom);
      @(negedge clk);
      while (tx_full) @(negedge clk);
      tx_push = 1; tx_data = ev;
      if (ev.addr[15:10] < 32) begin
        flit_t f;
        f.dx = 4'(ev.addr[15:10] % 3); f.dy = 4'(ev.addr[15:10] % 5);
        f.ev.addr = 16'(ev.addr[15:10] * 100) + 16'(ev.addr[9:0]); f.ev.value = ev.value;
        exp_q.push_back(f);
      end else exp_drops++;
      @(negedge clk); tx_push = 0;
    end
    repeat (100) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d packets not sent", exp_q.size()); end
    checks++;
    if (drops != exp_drops) begin failures++; $display("FAIL drops %0d exp %0d", drops, exp_drops); end
    // receive side: fill the FIFO, check back-pressure, then drain in order
    for (int n = 0; n < 16; n++) begin
      @(negedge clk); in_valid = 1; in_flit = '0; in_flit.ev = {16'(n), 16'(n * 3)};
    end
    @(negedge clk); in_valid = 0;
    checks++;
    if (in_ready) begin failures++; $display("FAIL in_ready while full"); end
    for (int n = 0; n < 16; n++) begin
      checks++;
      if (rx_empty || rx_data !== {16'(n), 16'(n * 3)}) begin
        failures++; $display("FAIL rx %0d got %h", n, rx_data);
      end
      @(negedge clk); rx_pop = 1;
      @(negedge clk); rx_pop = 0;
    end
    checks++;
    if (!rx_empty) begin failures++; $display("FAIL rx not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

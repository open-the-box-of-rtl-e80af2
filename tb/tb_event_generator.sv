// tb_event_generator -- self-checking test of EVC capture and AER conversion.
//
// Random EVC vectors (lanes zero, minus zero or non-zero) are fired whenever
// the generator is ready, with random back-pressure from the FIFO side. The
// stream of events must equal a model: non-zero lanes only, lowest lane first,
// address base + iter * 8 + lane, value unchanged. With no back-pressure a
// vector of k events must drain in k cycles (one event per cycle).
`timescale 1ns/1ps
module tb_event_generator;
  import seneca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] base, evc_iter;
  logic [15:0] evc_value [8];
  logic evc_fire, ready, ev_valid, ev_ready;
  aer_t ev_data;
  int checks = 0, failures = 0;

  event_generator dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  aer_t exp_q [$];

  // consumer: compare every accepted event
  always @(posedge clk) if (rst_n && ev_valid && ev_ready) begin
    checks++;
    if (exp_q.size() == 0 || ev_data !== exp_q[0]) begin
      failures++;
      if (failures < 10) $display("FAIL event %h exp %h", ev_data, exp_q.size() ? exp_q[0] : '0);
    end
    if (exp_q.size()) void'(exp_q.pop_front());
  end

  task automatic fire(input bit bp);
    int k;
    k = 0;
    @(negedge clk);
    while (!ready) @(negedge clk);
    evc_fire = 1; evc_iter = 16'($urandom_range(200)); base = 16'($urandom_range(4000));
    for (int l = 0; l < 8; l++) begin
      case ($urandom_range(3))
        0: evc_value[l] = 16'h0000;
        1: evc_value[l] = 16'h8000;
        default: evc_value[l] = 16'($urandom_range(65535, 1)) | 16'h0001;
      endcase
      if (evc_value[l][14:0] != 0) begin
        aer_t e;
        e.addr = base + evc_iter * 8 + 16'(l); e.value = evc_value[l];
        exp_q.push_back(e); k++;
      end
    end
    @(negedge clk); evc_fire = 0;
    if (!bp) begin
      // drains one per cycle
      repeat (k) begin
        checks++;
        if (ready) begin failures++; $display("FAIL ready too early"); end
        @(negedge clk);
      end
      checks++;
      if (!ready) begin failures++; $display("FAIL not ready after %0d events", k); end
    end
  endtask

  initial begin
    base = 0; evc_iter = 0; evc_fire = 0; ev_ready = 1;
    for (int l = 0; l < 8; l++) evc_value[l] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) fire(0);
    fork
      begin
        for (int n = 0; n < 300; n++) fire(1);
      end
      begin
        repeat (4000) begin @(negedge clk); ev_ready = 1'($urandom); end
      end
    join_any
    ev_ready = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d events missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

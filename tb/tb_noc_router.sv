// tb_noc_router -- self-checking test of the mesh router.
//
// A router at mesh position (1,1) receives random packets on all five
// inputs, with destinations anywhere in a 3 x 3 mesh, while its outputs are
// throttled at random. Each packet carries its input port and a sequence
// number. Checks: every packet leaves once, on the port the x-then-y rule
// gives, packets from one input to one output keep their order, no output
// is lost or duplicated, and with free outputs a packet is offered on its
// output port in the cycle after the input accepted it.
`timescale 1ns/1ps
module tb_noc_router;
  import seneca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  in_valid [5], in_ready [5], out_valid [5], out_ready [5];
  flit_t in_flit [5], out_flit [5];
  int checks = 0, failures = 0, sent = 0, recv = 0;

  noc_router dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd1), .*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int route(input flit_t f);
    if (f.dx > 1) return 2;
    if (f.dx < 1) return 4;
    if (f.dy > 1) return 3;
    if (f.dy < 1) return 1;
    return 0;
  endfunction

  int last_seq [5][5];   // [in][out]
  bit throttle = 1;

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      int src, seq;
      src = int'(out_flit[o].ev.addr[15:12]);
      seq = int'(out_flit[o].ev.value);
      recv++;
      checks++;
      if (route(out_flit[o]) != o) begin
        failures++;
        if (failures < 10) $display("FAIL packet to (%0d,%0d) left on port %0d", out_flit[o].dx, out_flit[o].dy, o);
      end
      checks++;
      if (seq <= last_seq[src][o]) begin
        failures++;
        if (failures < 10) $display("FAIL order in %0d out %0d seq %0d after %0d", src, o, seq, last_seq[src][o]);
      end
      last_seq[src][o] = seq;
    end
  end

  always @(negedge clk) for (int o = 0; o < 5; o++) out_ready[o] = throttle ? 1'($urandom) : 1'b1;

  for (genvar i = 0; i < 5; i++) begin : g_src
    initial begin
      in_valid[i] = 0; in_flit[i] = '0;
      @(posedge rst_n);
      for (int s = 1; s <= 400; s++) begin
        @(negedge clk);
        in_valid[i] = 1;
        in_flit[i].dx = 4'($urandom_range(2)); in_flit[i].dy = 4'($urandom_range(2));
        in_flit[i].ev.addr = {4'(i), 12'(s)}; in_flit[i].ev.value = 16'(s);
        @(posedge clk);
        while (!in_ready[i]) @(posedge clk);
        sent++;
        @(negedge clk); in_valid[i] = 0;
        repeat ($urandom_range(1)) @(negedge clk);
      end
    end
  end

  initial begin
    for (int i = 0; i < 5; i++) for (int o = 0; o < 5; o++) last_seq[i][o] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent == 2000);
    repeat (50) @(posedge clk);
    checks++;
    if (recv != sent) begin failures++; $display("FAIL sent %0d received %0d", sent, recv); end
    // latency with free outputs: one packet west-bound from the local port
    throttle = 0;
    repeat (5) @(negedge clk);
    in_valid[0] = 1; in_flit[0] = '0; in_flit[0].dx = 0; in_flit[0].dy = 1;
    in_flit[0].ev.addr = 16'h0FFF; in_flit[0].ev.value = 16'hFFFF;
    @(negedge clk); in_valid[0] = 0;
    checks++;
    if (!out_valid[4]) begin failures++; $display("FAIL packet not out after one cycle"); end
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_seneca_top -- end-to-end test of the 2 x 2 core mesh at full size.
//
// A two-layer network of integrate-and-fire neurons spread over the mesh,
// with every core's controller played by this testbench through the core's
// register bus:
//   1. Cores 0 and 3 prefetch their weights from the shared-memory model at
//      the same time (the arbiter has to share the port).
//   2. Core 0 (x=0,y=0) integrates 8 input spikes into 16 neurons and
//      generates spikes; its events are popped and pushed into the NoC, the
//      routing table sends them to core 3 (x=1,y=1), two hops away.
//   3. Core 3 integrates every event it receives into its 8 neurons and
//      generates the output spikes.
//   4. Meanwhile core 2 sends a burst of events to core 1 across the mesh,
//      and an event with no routing entry is dropped.
// A reference model (the kernel interpreter of tb_kernels_pkg) gives the
// expected neuron states and events of both layers. Each mechanism is
// counted and must occur at least once: EVC stall, load-use bypass, arbiter
// contention, prefetch, multi-hop delivery, routing-table drop.
`timescale 1ns/1ps
module tb_seneca_top;
  import seneca_pkg::*;
  import tb_util_pkg::*;
  import tb_kernels_pkg::*;

  localparam int NC = 4, N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        bus_we [NC], bus_re [NC], bus_rvalid [NC];
  logic [15:0] bus_addr [NC];
  logic [31:0] bus_wdata [NC], bus_rdata [NC];
  logic        im_en [NC], im_we [NC];
  logic [12:0] im_addr [NC];
  logic [31:0] im_wdata [NC], im_rdata [NC];
  logic        irq_evt [NC], irq_noc [NC], irq_done [NC], irq_pf [NC];
  logic        obs_stall [NC], obs_bypass [NC], obs_drop [NC];
  shm_req_t    shm_req;
  shm_rsp_t    shm_rsp;

  seneca_top dut (.*);
  shmem_model #(.WORDS(65536), .LAT(8), .STALL_PCT(10)) u_shm (.clk, .rst_n, .req(shm_req), .rsp(shm_rsp));

  int checks = 0, failures = 0;
  int n_stall = 0, n_bypass = 0, n_drop = 0, n_contention = 0, n_prefetch = 0, n_hops = 0;
  longint cycle = 0;
  bit done_seen [NC];

  always @(posedge clk) begin
    cycle++;
    if (rst_n) begin
      int r;
      r = 0;
      for (int c = 0; c < NC; c++) begin
        if (obs_stall[c]) n_stall++;
        if (obs_bypass[c]) n_bypass++;
        if (obs_drop[c]) n_drop++;
        if (irq_pf[c]) n_prefetch++;
        if (irq_done[c]) done_seen[c] = 1;
        if (dut.c_req[c].req) r++;
      end
      if (r > 1) n_contention++;
    end
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic bw(input int c, input int a, input logic [31:0] d);
    @(negedge clk); bus_we[c] = 1; bus_addr[c] = 16'(a); bus_wdata[c] = d;
    @(negedge clk); bus_we[c] = 0;
  endtask

  task automatic br(input int c, input int a, output logic [31:0] d);
    @(negedge clk); bus_re[c] = 1; bus_addr[c] = 16'(a);
    @(negedge clk); bus_re[c] = 0;
    d = bus_rdata[c];
  endtask

  // ---------------- reference model, one per core
  localparam int RROWS = 64;
  logic [15:0] ref_mem [NC][RROWS][N];
  logic [15:0] ref_reg [NC][N][64];

  task automatic ref_run(input int c, input int k, input int iters, input int a [4],
                         input int base, ref aer_t evq [$]);
    int ar [4];
    ar = a;
    for (int it = 0; it < iters; it++)
      for (int i = 0; i < KLEN[k]; i++) begin
        npe_instr_t t;
        t = kernel_instr(k, i);
        for (int l = 0; l < N; l++)
          case (t.op)
            OP_MLD: ref_reg[c][l][t.rd] = ref_mem[c][ar[t.areg]][l];
            OP_MST: ref_mem[c][ar[t.areg]][l] = ref_reg[c][l][t.ra];
            OP_EVC: if (bf2r(ref_reg[c][l][t.ra]) != 0.0) begin
              aer_t e;
              e.addr = 16'(base + it * N + l); e.value = ref_reg[c][l][t.ra];
              evq.push_back(e);
            end
            default: ref_reg[c][l][t.rd] = ref_alu(t.op, ref_reg[c][l][t.ra], ref_reg[c][l][t.rb]);
          endcase
        if (t.op inside {OP_MLD, OP_MST}) ar[t.areg] += t.inc;
      end
  endtask

  // run a kernel on core c; pop its events into got
  task automatic run(input int c, input int k, input int iters, input int a [4], input int base,
                     ref aer_t exp_q [$], ref aer_t got [$]);
    logic [31:0] d;
    ref_run(c, k, iters, a, base, exp_q);
    bw(c, 16'h2200, iters);
    for (int r = 0; r < 4; r++) bw(c, 16'h2210 + r, a[r]);
    bw(c, 16'h2201, base);
    done_seen[c] = 0;
    bw(c, 16'h2202, k);
    while (!done_seen[c]) begin
      if (irq_evt[c]) begin br(c, 16'h2204, d); got.push_back(aer_t'(d)); end
      else @(negedge clk);
    end
    do begin
      br(c, 16'h2203, d);
      if (!d[1]) begin br(c, 16'h2204, d); got.push_back(aer_t'(d)); d = '0; end
    end while (!(d[5] && d[1]));
  endtask

  task automatic set_reg_all(input int c, input int r, input logic [15:0] v);
    bw(c, 16'h4000 | (15 << 6) | r, {16'd0, v});
    for (int l = 0; l < N; l++) ref_reg[c][l][r] = v;
  endtask

  task automatic check_rows(input int c, input string what, input int r0, input int nrows);
    logic [31:0] d;
    for (int r = r0; r < r0 + nrows; r++)
      for (int p = 0; p < N / 2; p++) begin
        br(c, r * (N / 2) + p, d);
        checks++;
        if (bf2r(d[15:0]) != bf2r(ref_mem[c][r][2*p]) || bf2r(d[31:16]) != bf2r(ref_mem[c][r][2*p+1])) begin
          failures++;
          if (failures < 20) $display("FAIL %s core %0d row %0d pair %0d: %h", what, c, r, p, d);
        end
      end
  endtask

  task automatic cmp_events(input string what, ref aer_t got [$], ref aer_t exp_q [$]);
    chk({what, " event count"}, got.size(), exp_q.size());
    for (int i = 0; i < got.size() && i < exp_q.size(); i++) begin
      checks++;
      if (got[i].addr != exp_q[i].addr || bf2r(got[i].value) != bf2r(exp_q[i].value)) begin
        failures++;
        if (failures < 20) $display("FAIL %s event %0d: %h exp %h", what, i, got[i], exp_q[i]);
      end
    end
  endtask

  function automatic logic [15:0] rnd_val(input real lo, input real hi);
    return r2bf(lo + (hi - lo) * real'($urandom_range(10000)) / 10000.0);
  endfunction

  initial begin
    aer_t exp0 [$], got0 [$], exp3 [$], got3 [$], sent [$], recv1 [$];
    logic [31:0] d;
    int a [4];
    for (int c = 0; c < NC; c++) begin
      bus_we[c] = 0; bus_re[c] = 0; bus_addr[c] = 0; bus_wdata[c] = 0;
      im_en[c] = 0; im_we[c] = 0; im_addr[c] = 0; im_wdata[c] = 0; done_seen[c] = 0;
      for (int l = 0; l < N; l++) for (int r = 0; r < 64; r++) ref_reg[c][l][r] = 0;
      for (int r = 0; r < RROWS; r++) for (int l = 0; l < N; l++) ref_mem[c][r][l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // weights in shared memory: core 0 layer at words 0.., core 3 layer at 4096..
    for (int r = 0; r < 16; r++) for (int l = 0; l < N; l++) ref_mem[0][r][l] = rnd_val(-0.3, 1.0);
    for (int r = 0; r < 16; r++) for (int l = 0; l < N; l++) ref_mem[3][r][l] = rnd_val(-0.2, 0.6);
    for (int r = 0; r < 16; r++) for (int p = 0; p < N / 2; p++) begin
      u_shm.mem[r * 4 + p]        = {ref_mem[0][r][2*p+1], ref_mem[0][r][2*p]};
      u_shm.mem[4096 + r * 4 + p] = {ref_mem[3][r][2*p+1], ref_mem[3][r][2*p]};
    end

    // program kernels on all cores
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < 2; k++) begin
        for (int i = 0; i < KLEN[k]; i++) bw(c, 16'h2000 + KSTART[k] + i, 32'(kernel_instr(k, i)));
        bw(c, 16'h2100 + k, {16'd0, 8'(KLEN[k]), 8'(KSTART[k])});
      end

    // neuron state rows start at zero (the data memory itself has no reset)
    for (int w = 40 * 4; w < 42 * 4; w++) begin bw(0, w, 0); bw(3, w, 0); end

    // 1. concurrent prefetch of both weight sets (64 words each)
    bw(0, 16'h2207, 0);    bw(0, 16'h2208, 0); bw(0, 16'h2209, 64);
    bw(3, 16'h2207, 4096); bw(3, 16'h2208, 0); bw(3, 16'h2209, 64);
    @(negedge clk);                                  // start both in the same cycle
    bus_we[0] = 1; bus_addr[0] = 16'h220A; bus_wdata[0] = 0;
    bus_we[3] = 1; bus_addr[3] = 16'h220A; bus_wdata[3] = 0;
    @(negedge clk);
    bus_we[0] = 0; bus_we[3] = 0;
    do begin br(0, 16'h2203, d); end while (d[4]);
    do begin br(3, 16'h2203, d); end while (d[4]);

    // routing: core 0 neurons 0..1023 -> core 3, neuron base 0;
    //          core 2 neurons 0..1023 -> core 1, base 0x200
    bw(0, 16'h2300, {7'd0, 1'b1, 4'd1, 4'd1, 16'h0000});
    bw(2, 16'h2300, {7'd0, 1'b1, 4'd1, 4'd0, 16'h0200});

    // 2. layer 1 on core 0: 8 input spikes (input j -> rows 2j, 2j+1), 16 neurons at rows 40..41
    for (int j = 0; j < 8; j++) begin
      a = '{0, 2 * j, 40, 0};
      run(0, K_IF_INT, 2, a, 0, exp0, got0);
    end
    set_reg_all(0, 1, 16'h3F00);                    // threshold 0.5
    a = '{0, 40, 0, 0};
    run(0, K_IF_GEN, 2, a, 0, exp0, got0);
    cmp_events("layer 1", got0, exp0);
    check_rows(0, "layer 1 state", 40, 2);

    // forward layer-1 events through the NoC, plus cross traffic from core 2
    foreach (got0[i]) bw(0, 16'h2205, got0[i]);
    bw(0, 16'h2205, {16'h8000, 16'h3F80});           // no routing entry: dropped
    for (int i = 0; i < 20; i++) begin
      aer_t e;
      e.addr = 16'(i); e.value = 16'(i * 7);
      sent.push_back(e);
      bw(2, 16'h2205, e);
    end

    // 3. layer 2 on core 3: integrate each received event (input n -> row n), state row 40
    begin
      int got_n;
      got_n = 0;
      while (got_n < got0.size()) begin
        if (irq_noc[3]) begin
          aer_t e;
          aer_t none [$];
          br(3, 16'h2206, d);
          e = aer_t'(d);
          n_hops++;
          got_n++;
          a = '{0, int'(e.addr), 40, 0};
          run(3, K_IF_INT, 1, a, 0, none, none);
        end else @(negedge clk);
      end
    end
    set_reg_all(3, 1, 16'h4040);                    // threshold 3.0
    a = '{0, 40, 0, 0};
    run(3, K_IF_GEN, 1, a, 16'h0100, exp3, got3);
    cmp_events("layer 2", got3, exp3);
    check_rows(3, "layer 2 state", 40, 1);
    // integration order on core 3 follows arrival order; the reference used
    // the same order, so states must match exactly

    // 4. cross traffic received on core 1, in order, address translated
    while (recv1.size() < 20) begin
      if (irq_noc[1]) begin br(1, 16'h2206, d); recv1.push_back(aer_t'(d)); end
      else @(negedge clk);
      if (cycle > 400000) break;
    end
    chk("core 1 received", recv1.size(), 20);
    foreach (recv1[i]) chk("core 1 event", recv1[i], {sent[i].addr + 16'h0200, sent[i].value});

    $display("layer1 events=%0d layer2 events=%0d stall=%0d bypass=%0d contention=%0d prefetch=%0d hops=%0d drop=%0d",
             got0.size(), got3.size(), n_stall, n_bypass, n_contention, n_prefetch, n_hops, n_drop);
    chk("EVC stall happened", n_stall > 0, 1);
    chk("load-use bypass happened", n_bypass > 0, 1);
    chk("arbiter contention happened", n_contention > 0, 1);
    chk("prefetches finished", n_prefetch, 2);
    chk("multi-hop events delivered", n_hops > 0, 1);
    chk("routing-table drop happened", n_drop, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

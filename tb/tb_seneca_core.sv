// tb_seneca_core -- end-to-end test of one core, driven through its
// controller bus as the RISC-V firmware would drive it.
//
// All eight published micro-kernels (integrate-and-fire integration and
// spike generation, sigma-delta sigma and delta, Hebbian weight and trace
// update, e-prop eligibility and weight update) are loaded into the loop
// buffer and run on random BF16 data in the data memory. A reference
// interpreter in the testbench executes the same kernels lane by lane in
// double precision with BF16 rounding; the data memory (read back through
// port A) and the events (popped from the event FIFO while the kernel runs)
// must match it. For each run the cycles from start to done must equal
// iterations x kernel length plus the cycles the loop buffer stalled (one
// instruction per cycle). Then: a prefetch from and write-back to the
// shared-memory model, the NoC path (router port looped back to the core),
// and the instruction-memory port.
`timescale 1ns/1ps
module tb_seneca_core;
  import seneca_pkg::*;
  import tb_util_pkg::*;
  import tb_kernels_pkg::*;

  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bus_we, bus_re, bus_rvalid;
  logic [15:0] bus_addr;
  logic [31:0] bus_wdata, bus_rdata;
  logic im_en, im_we;
  logic [12:0] im_addr;
  logic [31:0] im_wdata, im_rdata;
  logic irq_evt, irq_noc, irq_done, irq_pf;
  logic noc_out_valid, noc_out_ready, noc_in_valid, noc_in_ready;
  flit_t noc_out_flit, noc_in_flit;
  shm_req_t shm_req;
  shm_rsp_t shm_rsp;
  logic obs_stall, obs_bypass, obs_drop;
  int checks = 0, failures = 0, stalls = 0, bypasses = 0, total_events = 0;

  seneca_core dut (.*);
  shmem_model #(.WORDS(4096), .LAT(6), .STALL_PCT(25)) u_shm (.clk, .rst_n, .req(shm_req), .rsp(shm_rsp));

  // NoC port looped back
  assign noc_in_valid  = noc_out_valid;
  assign noc_in_flit   = noc_out_flit;
  assign noc_out_ready = noc_in_ready;

  longint cycle = 0, done_at = 0;
  always @(posedge clk) begin
    cycle++;
    if (rst_n && irq_done) done_at = cycle;
  end

  always @(posedge clk) if (rst_n) begin
    if (obs_stall) stalls++;
    if (obs_bypass) bypasses++;
  end

  initial begin
    repeat (400000) @(posedge clk);
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

  task automatic bw(input int a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = 16'(a); bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask

  task automatic br(input int a, output logic [31:0] d);
    @(negedge clk); bus_re = 1; bus_addr = 16'(a);
    @(negedge clk); bus_re = 0;
    if (!bus_rvalid) begin failures++; $display("FAIL no rvalid"); end
    d = bus_rdata;
  endtask

  // reference state
  localparam int RROWS = 256;
  logic [15:0] ref_mem [RROWS][N];
  logic [15:0] ref_reg [N][64];
  aer_t exp_ev [$];
  aer_t got_ev [$];

  task automatic write_rows(input int r0, input int nrows);
    for (int r = r0; r < r0 + nrows; r++)
      for (int p = 0; p < N / 2; p++)
        bw(r * (N / 2) + p, {ref_mem[r][2*p+1], ref_mem[r][2*p]});
  endtask

  task automatic check_rows(input string what, input int r0, input int nrows);
    logic [31:0] d;
    for (int r = r0; r < r0 + nrows; r++)
      for (int p = 0; p < N / 2; p++) begin
        br(r * (N / 2) + p, d);
        checks++;
        if (bf2r(d[15:0]) != bf2r(ref_mem[r][2*p]) || bf2r(d[31:16]) != bf2r(ref_mem[r][2*p+1])) begin
          failures++;
          if (failures < 20)
            $display("FAIL %s row %0d pair %0d: got %h exp %h_%h", what, r, p, d,
                     ref_mem[r][2*p+1], ref_mem[r][2*p]);
        end
      end
  endtask

  task automatic set_reg_all(input int r, input logic [15:0] v);
    bw(16'h4000 | (15 << 6) | r, {16'd0, v});
    for (int l = 0; l < N; l++) ref_reg[l][r] = v;
  endtask

  // reference run of kernel k
  task automatic ref_run(input int k, input int iters, input int a [4], input int base);
    int ar [4];
    ar = a;
    for (int it = 0; it < iters; it++)
      for (int i = 0; i < KLEN[k]; i++) begin
        npe_instr_t t;
        t = kernel_instr(k, i);
        for (int l = 0; l < N; l++) begin
          case (t.op)
            OP_MLD: ref_reg[l][t.rd] = ref_mem[ar[t.areg]][l];
            OP_MST: ref_mem[ar[t.areg]][l] = ref_reg[l][t.ra];
            OP_EVC: if (bf2r(ref_reg[l][t.ra]) != 0.0) begin
              aer_t e;
              e.addr = 16'(base + it * N + l); e.value = ref_reg[l][t.ra];
              exp_ev.push_back(e);
            end
            default: ref_reg[l][t.rd] = ref_alu(t.op, ref_reg[l][t.ra], ref_reg[l][t.rb]);
          endcase
        end
        if (t.op inside {OP_MLD, OP_MST}) ar[t.areg] += t.inc;
      end
  endtask

  // run kernel k on the core, popping events while it runs
  task automatic run(input int k, input int iters, input int a [4], input int base);
    int st0;
    longint start_at;
    logic [31:0] d;
    ref_run(k, iters, a, base);
    bw(16'h2200, iters);
    for (int r = 0; r < 4; r++) bw(16'h2210 + r, a[r]);
    bw(16'h2201, base);
    st0 = stalls;
    done_at = 0;
    @(negedge clk); bus_we = 1; bus_addr = 16'h2202; bus_wdata = k;
    @(posedge clk); start_at = cycle;
    @(negedge clk); bus_we = 0;
    while (done_at == 0) begin
      if (irq_evt) begin
        br(16'h2204, d);
        got_ev.push_back(aer_t'(d));
      end else @(negedge clk);
    end
    // one instruction per cycle: done follows the last issue
    chk($sformatf("kernel %0d cycles", k), done_at - start_at, iters * KLEN[k] + (stalls - st0) + 2);
    // drain: until the event generator is idle and the FIFO empty
    do begin
      br(16'h2203, d);
      if (!d[1]) begin
        br(16'h2204, d);
        got_ev.push_back(aer_t'(d));
        d = '0;
      end
    end while (!(d[5] && d[1]));
    chk($sformatf("kernel %0d event count", k), got_ev.size(), exp_ev.size());
    while (got_ev.size() && exp_ev.size()) begin
      aer_t g, e;
      g = got_ev.pop_front(); e = exp_ev.pop_front();
      total_events++;
      checks++;
      if (g.addr != e.addr || bf2r(g.value) != bf2r(e.value)) begin
        failures++;
        if (failures < 20) $display("FAIL kernel %0d event %h exp %h", k, g, e);
      end
    end
    got_ev.delete(); exp_ev.delete();
  endtask

  function automatic logic [15:0] rnd_val(input real lo, input real hi);
    return r2bf(lo + (hi - lo) * real'($urandom_range(10000)) / 10000.0);
  endfunction

  initial begin
    logic [31:0] d;
    int a [4];
    bus_we = 0; bus_re = 0; bus_addr = 0; bus_wdata = 0;
    im_en = 0; im_we = 0; im_addr = 0; im_wdata = 0;
    for (int l = 0; l < N; l++) for (int r = 0; r < 64; r++) ref_reg[l][r] = 0;
    for (int r = 0; r < RROWS; r++) for (int l = 0; l < N; l++) ref_mem[r][l] = rnd_val(-1.0, 1.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    write_rows(0, 160);
    // load the eight kernels and the kernel table
    for (int k = 0; k < 8; k++) begin
      for (int i = 0; i < KLEN[k]; i++) bw(16'h2000 + KSTART[k] + i, 32'(kernel_instr(k, i)));
      bw(16'h2100 + k, {16'd0, 8'(KLEN[k]), 8'(KSTART[k])});
    end

    // ---- integrate-and-fire: 16 neurons (2 rows), weights rows 0..39
    for (int j = 0; j < 8; j++) begin
      a = '{0, 2 * j, 100, 0};           // ADD1 = weights of input j, ADD2 = states
      run(K_IF_INT, 2, a, 0);
    end
    set_reg_all(1, 16'hC100);            // threshold -8: every neuron fires
    a = '{0, 100, 0, 0};
    run(K_IF_GEN, 2, a, 64);
    check_rows("IF", 100, 2);

    // ---- sigma-delta: 24 neurons (3 rows), sigma rows 110.., quantised rows 120..
    for (int j = 0; j < 5; j++) begin
      set_reg_all(2, rnd_val(-2.0, 2.0));
      a = '{0, 40 + 3 * j, 110, 0};
      run(K_SD_SIG, 3, a, 0);
    end
    set_reg_all(2, 16'h0000);
    set_reg_all(3, 16'h3E80);             // q = 0.25
    a = '{0, 110, 120, 0};
    run(K_SD_DEL, 3, a, 1000);
    check_rows("SD", 110, 3);
    check_rows("SD q", 120, 3);

    // ---- Hebbian weight and trace update: 32 neurons (4 rows)
    set_reg_all(2, 16'h3F40); set_reg_all(3, 16'h3DCC);
    a = '{0, 60, 130, 0};
    run(K_HEB_W, 4, a, 0);
    set_reg_all(2, 16'h3F66); set_reg_all(3, 16'h3DCC);
    a = '{0, 64, 134, 0};
    run(K_HEB_TR, 4, a, 0);
    check_rows("Hebbian", 60, 8);

    // ---- e-prop eligibility and weight update: 16 neurons
    set_reg_all(3, 16'h3E80); set_reg_all(4, 16'h3F00); set_reg_all(5, 16'h4000);
    a = '{0, 70, 140, 150};
    run(K_EP_ELIG, 2, a, 0);
    set_reg_all(3, 16'h3C23);
    a = '{0, 80, 70, 142};
    run(K_EP_W, 2, a, 0);
    check_rows("e-prop", 70, 12);

    // ---- integer mode: INT8 pair add on one row through a one-off kernel
    bw(16'h2000 + 60, 32'(mld(0, 1, 0)));
    bw(16'h2000 + 61, 32'(mld(1, 2, 0)));
    bw(16'h2000 + 62, 32'(ins(OP_ADD, 1, 0, 1, 0, 0, 1)));
    bw(16'h2000 + 63, 32'(mst(2, 1, 1)));
    bw(16'h2100 + 7, {16'd0, 8'd4, 8'd60});
    for (int l = 0; l < N; l++) begin
      ref_mem[200][l] = 16'($urandom); ref_mem[201][l] = 16'($urandom);
    end
    write_rows(200, 2);
    bw(16'h2200, 1); bw(16'h2211, 200); bw(16'h2212, 201); bw(16'h2202, 7);
    repeat (8) @(negedge clk);
    for (int p = 0; p < N / 2; p++) begin
      logic [31:0] e;
      for (int h = 0; h < 2; h++)
        for (int b = 0; b < 2; b++) begin
          int s;
          s = int'(signed'(ref_mem[200][2*p+h][8*b +: 8])) + int'(signed'(ref_mem[201][2*p+h][8*b +: 8]));
          e[16*h + 8*b +: 8] = (s > 127) ? 8'h7F : (s < -128) ? 8'h80 : 8'(s);
        end
      br(201 * (N / 2) + p, d);
      chk("int8 add", d, e);
    end

    // ---- prefetch from and write-back to the shared memory
    bw(16'h2207, 500); bw(16'h2208, 3000); bw(16'h2209, 20); bw(16'h220A, 0);
    while (!irq_pf) @(negedge clk);
    for (int i = 0; i < 20; i++) begin
      br(3000 + i, d);
      chk("prefetched word", d, 32'(500 + i) ^ 32'hA5A5_0000);
    end
    bw(16'h2207, 900); bw(16'h2208, 0); bw(16'h2209, 12); bw(16'h220A, 1);
    while (!irq_pf) @(negedge clk);
    for (int i = 0; i < 12; i++)
      chk("written-back word", u_shm.mem[900 + i],
          {ref_mem[i / 4][2 * (i % 4) + 1], ref_mem[i / 4][2 * (i % 4)]});

    // ---- NoC: entry 2 sends neurons 2048..3071 to core (1,0), base 0x100
    bw(16'h2302, {7'd0, 1'b1, 4'd1, 4'd0, 16'h0100});
    bw(16'h2205, {16'd2048 + 16'd5, 16'h3F80});
    bw(16'h2205, {16'd7, 16'h3F80});      // entry 0 invalid: dropped
    repeat (4) @(negedge clk);
    chk("noc irq", irq_noc, 1);
    br(16'h2206, d);
    chk("noc event", d, {16'h0105, 16'h3F80});
    br(16'h2203, d);
    chk("noc rx empty", d[2], 1);

    // ---- instruction memory port
    @(negedge clk); im_en = 1; im_we = 1; im_addr = 13'd77; im_wdata = 32'h0051_0113;
    @(negedge clk); im_we = 0;
    @(negedge clk); im_en = 0;
    chk("imem", im_rdata, 32'h0051_0113);

    $display("events=%0d stall_cycles=%0d bypasses=%0d", total_events, stalls, bypasses);
    chk("stalls seen", stalls > 0, 1);
    chk("bypasses seen", bypasses > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

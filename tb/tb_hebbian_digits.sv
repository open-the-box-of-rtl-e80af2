// tb_hebbian_digits -- workload test: unsupervised Hebbian learning of an
// integrate-and-fire layer, in the shape of the digit-classification network
// (64 inputs, one per pixel of an 8 x 8 image, and M = 8 output neurons).
//
// Runs on core (0,0) of the full-size mesh, the testbench acting as that
// core's controller. Each time step:
//   1. every input pixel that spikes (random, with a per-pixel rate that
//      encodes a random "image") is integrated: IF integration kernel with
//      ADDR1 = weight row of that pixel, ADDR2 = membrane row;
//   2. the spike-generation kernel fires the output neurons above threshold;
//      the controller pops the events and writes the output spike row;
//   3. the post-synaptic trace is updated, tr = beta*tr + (1-beta)*s;
//   4. the weights of every input that spiked are updated,
//      w += eta * tr_post * x_in (Hebbian weight kernel).
// Weights, membranes, traces and events are compared every step with the
// reference kernel interpreter. The number of time steps is smaller than a
// real run (100 per image) to keep the simulation short.
module tb_hebbian_digits;
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
  localparam int RROWS = 80;
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

  localparam int NIN = 64, STEPS = 6;
  localparam int ROW_W = 0, ROW_V = 64, ROW_S = 65, ROW_TR = 66;

  task automatic set_row(input int r, input logic [15:0] v [N]);
    for (int p = 0; p < N / 2; p++) bw(0, r * (N / 2) + p, {v[2*p+1], v[2*p]});
    for (int l = 0; l < N; l++) ref_mem[0][r][l] = v[l];
  endtask

  initial begin
    aer_t exp_q [$], got [$], none [$];
    logic [15:0] row [N];
    int rate [NIN];
    int a [4];
    int n_in_spikes = 0, n_out_spikes = 0;
    for (int c = 0; c < NC; c++) begin
      bus_we[c] = 0; bus_re[c] = 0; bus_addr[c] = 0; bus_wdata[c] = 0;
      im_en[c] = 0; im_we[c] = 0; im_addr[c] = 0; im_wdata[c] = 0; done_seen[c] = 0;
      for (int l = 0; l < N; l++) for (int r = 0; r < 64; r++) ref_reg[c][l][r] = 0;
      for (int r = 0; r < RROWS; r++) for (int l = 0; l < N; l++) ref_mem[c][r][l] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      for (int i = 0; i < KLEN[k]; i++) bw(0, 16'h2000 + KSTART[k] + i, 32'(kernel_instr(k, i)));
      bw(0, 16'h2100 + k, {16'd0, 8'(KLEN[k]), 8'(KSTART[k])});
    end
    // random initial weights, zero membranes, spikes and traces
    for (int r = 0; r < NIN; r++) begin
      for (int l = 0; l < N; l++) row[l] = rnd_val(0.0, 0.25);
      set_row(ROW_W + r, row);
    end
    for (int l = 0; l < N; l++) row[l] = 0;
    set_row(ROW_V, row); set_row(ROW_S, row); set_row(ROW_TR, row);
    for (int j = 0; j < NIN; j++) rate[j] = $urandom_range(60);   // spike probability in %

    for (int t = 0; t < STEPS; t++) begin
      int spk [$];
      spk = {};
      for (int j = 0; j < NIN; j++) if ($urandom_range(99) < rate[j]) spk.push_back(j);
      n_in_spikes += spk.size();
      // 1. integration
      foreach (spk[i]) begin
        a = '{0, ROW_W + spk[i], ROW_V, 0};
        run(0, K_IF_INT, 1, a, 0, none, none);
      end
      // 2. spike generation, threshold 3.0
      set_reg_all(0, 1, 16'h4040);
      a = '{0, ROW_V, 0, 0};
      exp_q = {}; got = {};
      run(0, K_IF_GEN, 1, a, 16'h0100, exp_q, got);
      cmp_events($sformatf("step %0d", t), got, exp_q);
      n_out_spikes += got.size();
      for (int l = 0; l < N; l++) row[l] = 0;
      foreach (got[i]) row[got[i].addr - 16'h0100] = got[i].value;
      set_row(ROW_S, row);
      // 3. post-synaptic trace, beta = 0.75
      set_reg_all(0, 2, 16'h3F40); set_reg_all(0, 3, 16'h3E80);
      a = '{0, ROW_TR, ROW_S, 0};
      run(0, K_HEB_TR, 1, a, 0, none, none);
      // 4. Hebbian update of the weights of the inputs that spiked, eta = 0.0625
      set_reg_all(0, 2, 16'h3F80); set_reg_all(0, 3, 16'h3D80);
      foreach (spk[i]) begin
        a = '{0, ROW_W + spk[i], ROW_TR, 0};
        run(0, K_HEB_W, 1, a, 0, none, none);
      end
      check_rows(0, $sformatf("step %0d state", t), ROW_V, 3);
    end
    check_rows(0, "weights", ROW_W, NIN);
    $display("input spikes=%0d output spikes=%0d stall=%0d bypass=%0d", n_in_spikes, n_out_spikes, n_stall, n_bypass);
    chk("output neurons fired", n_out_spikes > 0, 1);
    chk("load-use bypass happened", n_bypass > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

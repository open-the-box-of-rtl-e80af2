// tb_shmem_arbiter -- self-checking test of the shared-memory arbiter.
//
// Four requesters issue random reads and writes (each holds a request until
// granted, one read outstanding at a time) to the shared-memory model, which
// refuses some cycles at random and returns reads after 4 cycles. Checks:
// every read returns to the requester that issued it with the data the
// memory holds (a reference copy is kept in the testbench), the memory sees
// the writes, at most one grant per cycle, round-robin fairness (no requester
// waits for more than N grants to others), and that contention happened.
`timescale 1ns/1ps
module tb_shmem_arbiter;
  import seneca_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  shm_req_t s_req [N];
  shm_rsp_t s_rsp [N];
  shm_req_t m_req;
  shm_rsp_t m_rsp;
  int checks = 0, failures = 0, contention = 0, finished = 0;

  shmem_arbiter #(.N(N)) dut (.*);
  shmem_model #(.WORDS(1024), .LAT(4), .STALL_PCT(20)) u_mem (.clk, .rst_n, .req(m_req), .rsp(m_rsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_mem [1024];
  initial for (int i = 0; i < 1024; i++) ref_mem[i] = 32'(i) ^ 32'hA5A5_0000;

  int others [N];
  always @(posedge clk) if (rst_n) begin
    int g;
    g = 0;
    for (int i = 0; i < N; i++) if (s_rsp[i].gnt) g++;
    checks++;
    if (g > 1) begin failures++; $display("FAIL two grants"); end
    if (g == 1) begin
      int req_cnt;
      req_cnt = 0;
      for (int i = 0; i < N; i++) if (s_req[i].req) req_cnt++;
      if (req_cnt > 1) contention++;
      for (int i = 0; i < N; i++) begin
        if (s_rsp[i].gnt) others[i] = 0;
        else if (s_req[i].req) begin
          others[i]++;
          if (others[i] > N) begin failures++; $display("FAIL starvation %0d", i); end
        end
      end
    end
  end

  for (genvar c = 0; c < N; c++) begin : g_req
    initial begin
      s_req[c] = '0;
      @(posedge rst_n);
      repeat (300) begin
        int a;
        a = c * 256 + $urandom_range(255);
        @(negedge clk);
        s_req[c].req = 1; s_req[c].we = 1'($urandom); s_req[c].addr = 32'(a);
        s_req[c].wdata = $urandom;
        @(posedge clk);
        while (!s_rsp[c].gnt) @(posedge clk);
        if (s_req[c].we) begin
          ref_mem[a] = s_req[c].wdata;
          @(negedge clk); s_req[c].req = 0;
        end else begin
          logic [31:0] e;
          e = ref_mem[a];
          @(negedge clk); s_req[c].req = 0;
          @(posedge clk);
          while (!s_rsp[c].rvalid) @(posedge clk);
          checks++;
          if (s_rsp[c].rdata !== e) begin
            failures++;
            if (failures < 10) $display("FAIL core %0d read %0d got %h exp %h", c, a, s_rsp[c].rdata, e);
          end
        end
        repeat ($urandom_range(2)) @(negedge clk);
      end
      finished++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished == N);
    repeat (10) @(posedge clk);
    for (int i = 0; i < 1024; i++) begin
      checks++;
      if (u_mem.mem[i] !== ref_mem[i]) begin
        failures++;
        if (failures < 10) $display("FAIL mem[%0d] = %h exp %h", i, u_mem.mem[i], ref_mem[i]);
      end
    end
    checks++;
    if (contention == 0) begin failures++; $display("FAIL no contention seen"); end
    $display("grants with contention: %0d", contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_prefetch_unit -- self-checking test of the shared-memory prefetch unit.
//
// The unit talks to the shared-memory model (random refusals, 4-cycle read
// latency) and to a local-memory model that plays data-memory port A and
// withholds lm_gnt at random, as the controller would by using the port.
// A prefetch of 40 words must copy shared[ext..] into local[loc..] exactly,
// a write-back of 25 words must copy local words into shared memory, and a
// zero-length transfer must finish at once. busy and done are checked.
`timescale 1ns/1ps
module tb_prefetch_unit;
  import seneca_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, dir, busy, done, lm_req, lm_we, lm_gnt;
  logic [31:0] ext_addr, lm_wdata, lm_rdata;
  logic [12:0] loc_addr, lm_addr;
  logic [15:0] len;
  shm_req_t shm_req;
  shm_rsp_t shm_rsp;
  int checks = 0, failures = 0, dones = 0;

  prefetch_unit dut (.*);
  shmem_model #(.WORDS(4096), .LAT(4), .STALL_PCT(30)) u_mem (.clk, .rst_n, .req(shm_req), .rsp(shm_rsp));

  logic [31:0] lmem [8192];
  logic deny;
  always_ff @(posedge clk) deny <= 1'($urandom);
  assign lm_gnt = lm_req && !deny;
  always_ff @(posedge clk) begin
    if (lm_gnt && lm_we) lmem[lm_addr] <= lm_wdata;
    if (lm_gnt && !lm_we) lm_rdata <= lmem[lm_addr];
  end
  always @(posedge clk) if (rst_n && done) dones++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic xfer(input bit d, input int ext, input int loc, input int n);
    @(negedge clk); start = 1; dir = d; ext_addr = 32'(ext); loc_addr = 13'(loc); len = 16'(n);
    @(negedge clk); start = 0;
    if (n != 0) begin
      checks++;
      if (!busy) begin failures++; $display("FAIL not busy"); end
    end
    while (busy) @(negedge clk);
  endtask

  initial begin
    start = 0; dir = 0; ext_addr = 0; loc_addr = 0; len = 0;
    for (int i = 0; i < 8192; i++) lmem[i] = 32'hDEAD_0000 | 32'(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    xfer(0, 1000, 300, 40);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (lmem[300 + i] !== (32'(1000 + i) ^ 32'hA5A5_0000)) begin
        failures++;
        if (failures < 10) $display("FAIL prefetch word %0d got %h", i, lmem[300 + i]);
      end
    end
    checks++;
    if (lmem[340] !== (32'hDEAD_0000 | 32'd340) || lmem[299] !== (32'hDEAD_0000 | 32'd299)) begin
      failures++; $display("FAIL prefetch wrote outside its range");
    end
    xfer(1, 2000, 5000, 25);
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (u_mem.mem[2000 + i] !== (32'hDEAD_0000 | 32'(5000 + i))) begin
        failures++;
        if (failures < 10) $display("FAIL write-back word %0d got %h", i, u_mem.mem[2000 + i]);
      end
    end
    xfer(0, 0, 0, 0);
    @(negedge clk);
    checks++;
    if (dones != 3) begin failures++; $display("FAIL done pulses %0d", dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_loop_buffer -- self-checking test of the micro-kernel sequencer.
//
// Loads the integrate-and-fire spike-integration kernel (4 instructions) and
// a 6-instruction spike-generation kernel ending in EVC, starts them, and
// compares every issued instruction, its data-memory row and its iteration
// with a model of the for-loop replay. Checks one instruction per cycle
// (iterations x length cycles from start to done) when nothing stalls, that
// an EVC is held while evc_ready is low, and that an empty kernel finishes
// at once.
`timescale 1ns/1ps
module tb_loop_buffer;
  import seneca_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prog_we, ktab_we, iters_we, areg_we, start, busy, done, evc_ready, issue, stall;
  logic [6:0] prog_addr, ktab_start;
  logic [7:0] ktab_len;
  logic [2:0] ktab_idx, start_kernel;
  npe_instr_t prog_data, issue_instr;
  logic [15:0] iters_wdata, areg_wdata, issue_row, issue_iter;
  logic [1:0]  areg_idx;
  logic [15:0] areg_rdata [4];
  int checks = 0, failures = 0;

  loop_buffer dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  npe_instr_t k1 [4];
  npe_instr_t k2 [6];

  task automatic load(input int base, input npe_instr_t t);
    @(negedge clk); prog_we = 1; prog_addr = 7'(base); prog_data = t;
    @(negedge clk); prog_we = 0;
  endtask

  task automatic set_areg(input int r, input int v);
    @(negedge clk); areg_we = 1; areg_idx = 2'(r); areg_wdata = 16'(v);
    @(negedge clk); areg_we = 0;
  endtask

  // run kernel k, compare the issue stream with the model
  task automatic run(input int k, input int kb, input int klen, input npe_instr_t prog [],
                     input int iters, input int a1, input int a2, input bit block_evc);
    int row [4];
    int cyc, issued;
    row[0] = 0; row[1] = a1; row[2] = a2; row[3] = 0;
    @(negedge clk); iters_we = 1; iters_wdata = 16'(iters);
    @(negedge clk); iters_we = 0;
    set_areg(1, a1); set_areg(2, a2);
    @(negedge clk); start = 1; start_kernel = 3'(k);
    @(negedge clk); start = 0;
    cyc = 0; issued = 0;
    for (int it = 0; it < iters; it++) begin
      for (int p = 0; p < klen; p++) begin
        // hold EVCs for 3 cycles when asked
        if (block_evc && prog[p].op == OP_EVC) begin
          evc_ready = 0;
          repeat (3) begin
            #1 chk("stall while not ready", {31'd0, stall}, 1);
            chk("no issue while stalled", {31'd0, issue}, 0);
            @(negedge clk); cyc++;
          end
          evc_ready = 1;
        end
        #1;
        chk("issue", {31'd0, issue}, 1);
        chk("instr", int'(issue_instr), int'(prog[p]));
        chk("iter", int'(issue_iter), it);
        if (prog[p].op inside {OP_MLD, OP_MST}) begin
          chk("row", int'(issue_row), row[prog[p].areg]);
          row[prog[p].areg] += prog[p].inc;
        end
        @(negedge clk); cyc++; issued++;
      end
    end
    #1 chk("done pulse", {31'd0, done}, 1);
    chk("not busy", {31'd0, busy}, 0);
    chk("cycles", cyc, iters * klen + (block_evc ? 3 * iters : 0));
    chk("final ADD1", int'(areg_rdata[1]), row[1]);
    chk("final ADD2", int'(areg_rdata[2]), row[2]);
  endtask

  initial begin
    prog_we = 0; ktab_we = 0; iters_we = 0; areg_we = 0; start = 0; evc_ready = 1;
    prog_addr = 0; ktab_start = 0; ktab_len = 0; ktab_idx = 0; start_kernel = 0;
    prog_data = '0; iters_wdata = 0; areg_wdata = 0; areg_idx = 0;
    k1 = '{mld(0, 1, 1), mld(1, 2, 0), ins(OP_ADD, 1, 0, 1), mst(2, 1, 1)};
    k2 = '{mld(0, 1, 0), ins(OP_GTH, 2, 0, 1), ins(OP_MUL, 3, 2, 0),
           ins(OP_SUB, 0, 0, 3), mst(1, 0, 1), evc(2)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) load(10 + i, k1[i]);
    for (int i = 0; i < 6; i++) load(40 + i, k2[i]);
    @(negedge clk); ktab_we = 1; ktab_idx = 1; ktab_start = 10; ktab_len = 4;
    @(negedge clk); ktab_idx = 5; ktab_start = 40; ktab_len = 6;
    @(negedge clk); ktab_idx = 2; ktab_start = 0;  ktab_len = 0;
    @(negedge clk); ktab_we = 0;
    run(1, 10, 4, k1, 5, 100, 300, 0);
    run(5, 40, 6, k2, 3, 7, 0, 0);
    run(5, 40, 6, k2, 2, 50, 0, 1);
    // empty kernel finishes at once
    @(negedge clk); start = 1; start_kernel = 2;
    @(negedge clk); start = 0;
    #1 chk("empty kernel done", {31'd0, done}, 1);
    chk("empty kernel not busy", {31'd0, busy}, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_npe -- self-checking test of one NPE.
//
// The testbench plays the data-memory lane (one-cycle read latency) and
// issues instructions directly. Directed cases: register access through the
// cfg port, ALU write-back, a load followed at once by a use of the loaded
// register (bypass), MST and EVC values. Then 2000 random instructions
// (MLD, ADD, SUB, MUL, MST, issue gaps) on small integer values are run
// against a reference model of the register file kept in double precision;
// every MST value and finally every register are compared.
`timescale 1ns/1ps
module tb_npe;
  import seneca_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        issue, cfg_we, bypass;
  npe_instr_t  instr;
  logic [15:0] mem_rdata, mem_wdata, evc_value, cfg_wdata, cfg_rdata;
  logic [5:0]  cfg_addr;
  int checks = 0, failures = 0, bypasses = 0;

  npe dut (.*);

  // memory lane model: read data the cycle after an MLD issue
  logic [15:0] lane_mem [16];
  always_ff @(posedge clk)
    if (issue && instr.op == OP_MLD) mem_rdata <= lane_mem[instr.inc];

  always @(posedge clk) if (bypass) bypasses++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic [15:0] got, input logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  task automatic wr(input int r, input logic [15:0] v);
    @(negedge clk); cfg_we = 1; cfg_addr = 6'(r); cfg_wdata = v;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic [15:0] rd(input int r);
    return dut.rf[r];
  endfunction

  task automatic iss(input npe_instr_t t);
    @(negedge clk); issue = 1; instr = t;
  endtask

  task automatic chkr(input string what, input logic [15:0] got, input real exp);
    checks++;
    if (bf2r(got) != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h exp %f", what, got, exp);
    end
  endtask

  task automatic idle();
    @(negedge clk); issue = 0; instr = ins(OP_NOP);
  endtask

  real model [64];

  initial begin
    issue = 0; instr = ins(OP_NOP); cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; mem_rdata = 0;
    for (int i = 0; i < 16; i++) lane_mem[i] = r2bf(real'(i) - 4.0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // cfg port
    wr(0, 16'h3F80);   // 1.0
    wr(1, 16'h4000);   // 2.0
    cfg_addr = 0; #1 chk("cfg read R0", cfg_rdata, 16'h3F80);
    cfg_addr = 1; #1 chk("cfg read R1", cfg_rdata, 16'h4000);
    // ALU write-back
    iss(ins(OP_ADD, 2, 0, 1));            // R2 = 3.0
    idle();
    chk("ADD", rd(2), 16'h4040);
    // load then immediate use: MLD R5 <- lane_mem[8] = 4.0 ; ADD R6 = R5 + R0
    iss(mld(5, 1, 8));
    iss(ins(OP_ADD, 6, 5, 0));
    #1 chk("bypass flag", {15'd0, bypass}, 16'd1);
    idle();
    chk("load-use ADD", rd(6), 16'h40A0);
    chk("loaded R5", rd(5), 16'h4080);
    // MST and EVC drive ra
    iss(mst(1, 6, 0));
    #1 chk("MST value", mem_wdata, 16'h40A0);
    iss(evc(2));
    #1 chk("EVC value", evc_value, 16'h4040);
    idle();
    // integrate-and-fire spike generation: v=R0(3.0), th=R1(2.0)
    wr(10, 16'h4040); wr(11, 16'h4000);
    iss(ins(OP_GTH, 12, 10, 11));          // spike
    iss(ins(OP_MUL, 13, 12, 10));          // v*s
    iss(ins(OP_SUB, 10, 10, 13));          // reset
    idle();
    chk("IF spike", rd(12), 16'h3F80);
    chk("IF reset", rd(10), 16'h0000);

    // random program against a reference model
    for (int r = 0; r < 64; r++) model[r] = bf2r(rd(r));
    begin
      real ld_val; int ld_r; bit ld_p;
      ld_p = 0; ld_val = 0; ld_r = 0;
      for (int n = 0; n < 2000; n++) begin
        int op, a, b, d, k;
        real va, vb;
        op = $urandom_range(5); a = $urandom_range(7); b = $urandom_range(7);
        d = $urandom_range(7); k = $urandom_range(15);
        if (ld_p) model[ld_r] = ld_val;   // completes at the end of this cycle
        va = model[a]; vb = model[b];
        ld_p = 0;
        case (op)
          0: begin iss(mld(d, 0, k)); ld_p = 1; ld_r = d; ld_val = real'(k) - 4.0; end
          1: begin iss(ins(OP_ADD, d, a, b)); model[d] = bf2r(r2bf(va + vb)); end
          2: begin iss(ins(OP_SUB, d, a, b)); model[d] = bf2r(r2bf(va - vb)); end
          3: begin iss(ins(OP_MUL, d, a, b)); model[d] = bf2r(r2bf(va * vb)); end
          4: begin iss(mst(0, a, 0)); #1 chkr("rand MST", mem_wdata, va); end
          default: idle();
        endcase
        // keep numbers small so that all stay exact
        for (int r = 0; r < 8; r++)
          if (model[r] > 64.0 || model[r] < -64.0) begin
            @(negedge clk); issue = 0;
            if (ld_p) begin model[ld_r] = ld_val; ld_p = 0; end
            cfg_we = 1; cfg_addr = 6'(r); cfg_wdata = 16'h3F80; model[r] = 1.0;
            @(negedge clk); cfg_we = 0;
          end
      end
      idle();
      if (ld_p) model[ld_r] = ld_val;
      idle();
      for (int r = 0; r < 8; r++) chkr($sformatf("final R%0d", r), rd(r), model[r]);
    end
    checks++;
    if (bypasses < 20) begin failures++; $display("FAIL too few bypasses %0d", bypasses); end
    $display("bypasses=%0d", bypasses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

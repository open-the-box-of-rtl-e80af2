// tb_data_mem -- self-checking test of the two-port data memory.
//
// Random writes and reads on both ports, at the full 8K x 32-bit size with
// 8 NPE lanes, checked against a word-level reference array in the
// testbench: port A words map to lane pairs of a port-B row, reads come one
// cycle after the request, and a same-cycle write of the same lane by both
// ports keeps port B's data.
`timescale 1ns/1ps
module tb_data_mem;
  localparam int WORDS = 8192, N = 8, ROWS = WORDS * 2 / N;
  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en, a_we, b_en, b_we;
  logic [12:0] a_addr;
  logic [10:0] b_addr;
  logic [31:0] a_wdata, a_rdata;
  logic [127:0] b_wdata, b_rdata;
  int checks = 0, failures = 0;

  data_mem dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] ref_lane [ROWS][N];   // reference: one 16-bit lane per NPE

  initial begin
    logic [31:0] expa;
    logic [127:0] expb;
    bit cha, chb;
    a_en = 0; a_we = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise a window of rows through port B
    for (int r = 0; r < 64; r++) begin
      @(negedge clk); b_en = 1; b_we = 1; b_addr = 11'(r);
      for (int l = 0; l < N; l++) begin
        ref_lane[r][l] = 16'($urandom);
        b_wdata[16*l +: 16] = ref_lane[r][l];
      end
    end
    @(negedge clk); b_en = 0; b_we = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      a_en = 1'($urandom); a_we = 1'($urandom); a_addr = 13'($urandom_range(255));
      b_en = 1'($urandom); b_we = 1'($urandom); b_addr = 11'($urandom_range(63));
      a_wdata = $urandom; b_wdata = {$urandom, $urandom, $urandom, $urandom};
      cha = a_en && !a_we; chb = b_en && !b_we;
      expa = {ref_lane[a_addr / 4][2 * (a_addr % 4) + 1], ref_lane[a_addr / 4][2 * (a_addr % 4)]};
      for (int l = 0; l < N; l++) expb[16*l +: 16] = ref_lane[b_addr][l];
      if (a_en && a_we) begin
        ref_lane[a_addr / 4][2 * (a_addr % 4)]     = a_wdata[15:0];
        ref_lane[a_addr / 4][2 * (a_addr % 4) + 1] = a_wdata[31:16];
      end
      if (b_en && b_we)
        for (int l = 0; l < N; l++) ref_lane[b_addr][l] = b_wdata[16*l +: 16];
      @(posedge clk); #1;
      if (cha) begin
        checks++;
        if (a_rdata !== expa) begin
          failures++;
          if (failures < 10) $display("FAIL A %0d got %h exp %h", a_addr, a_rdata, expa);
        end
      end
      if (chb) begin
        checks++;
        if (b_rdata !== expb) begin
          failures++;
          if (failures < 10) $display("FAIL B %0d got %h exp %h", b_addr, b_rdata, expb);
        end
      end
    end
    // top of the address range
    @(negedge clk); a_en = 1; a_we = 1; b_en = 0; a_addr = 13'(WORDS - 1); a_wdata = 32'hCAFE_F00D;
    @(negedge clk); a_en = 0; b_en = 1; b_we = 0; b_addr = 11'(ROWS - 1);
    @(posedge clk); #1 checks++;
    if (b_rdata[127:96] !== 32'hCAFE_F00D) begin failures++; $display("FAIL top row"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

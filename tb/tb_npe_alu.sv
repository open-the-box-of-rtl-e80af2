// tb_npe_alu -- self-checking test of the NPE arithmetic.
//
// Random BF16 operands (normal numbers of moderate range plus zeros) go
// through every BF16 op; the expected result is computed in double precision
// and rounded to BF16 (nearest-even, flush to zero below the normal range) by
// code of this testbench, independent of the ALU's integer datapath. The
// 2xINT8 ops are checked lane by lane against integer arithmetic, and a few
// special values (x/0, 0/0, Inf-Inf, overflow) are checked directly.
`timescale 1ns/1ps
module tb_npe_alu;
  import seneca_pkg::*;

  npe_op_e     op;
  logic        i8;
  logic [5:0]  sel;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  npe_alu dut (.op, .i8, .sel, .a, .b, .y);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real to_real(input logic [15:0] x);
    logic [63:0] d;
    if (x[14:7] == 8'd0) return 0.0;
    d = {x[15], 11'(int'(x[14:7]) - 127 + 1023), x[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [15:0] to_bf16(input real r);
    logic [63:0] d;
    int e;
    logic [8:0] m;
    logic g, st;
    d = $realtobits(r);
    if (d[62:52] == 11'd0) return {d[63], 15'd0};
    e  = int'(d[62:52]) - 1023;
    g  = d[44];
    st = |d[43:0];
    m  = {2'b01, d[51:45]} + 9'((g && (st || d[45])) ? 1 : 0);
    if (m[8]) begin m = m >> 1; e++; end
    if (e + 127 >= 255) return {d[63], 8'hFF, 7'd0};
    if (e + 127 <= 0)   return {d[63], 15'd0};
    return {d[63], 8'(e + 127), m[6:0]};
  endfunction

  function automatic logic [15:0] rand_bf16();
    if ($urandom_range(19) == 0) return {1'($urandom), 15'd0};
    return {1'($urandom), 8'($urandom_range(145, 110)), 7'($urandom)};
  endfunction

  task automatic apply(input npe_op_e o, input logic m8, input logic [5:0] s,
                       input logic [15:0] x, input logic [15:0] z);
    op = o; i8 = m8; sel = s; a = x; b = z;
    #1;
  endtask

  task automatic expect_eq(input string what, input logic [15:0] exp);
    checks++;
    // any NaN matches any NaN
    if (!(y === exp || (exp[14:7] == 8'hFF && exp[6:0] != 0 && y[14:7] == 8'hFF && y[6:0] != 0))) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s op=%s a=%h b=%h got %h exp %h", what, op.name(), a, b, y, exp);
    end
  endtask

  function automatic int s8(input logic [7:0] v); return int'(signed'(v)); endfunction
  function automatic logic [7:0] sat(input int v);
    if (v > 127) return 8'h7F;
    if (v < -128) return 8'h80;
    return 8'(v);
  endfunction

  initial begin
    real ra, rb, rr;
    logic [15:0] x, z, e;
    int ia, ib;
    logic [7:0] l0, l1;
    a = 0; b = 0; op = OP_NOP; i8 = 0; sel = 0;
    #2;
    for (int n = 0; n < 3000; n++) begin
      x = rand_bf16(); z = rand_bf16();
      ra = to_real(x); rb = to_real(z);
      apply(OP_ADD, 0, 0, x, z); e = to_bf16(ra + rb);
      if (ra + rb == 0.0) e = (x[15] & z[15]) ? 16'h8000 : 16'h0000;
      expect_eq("add", e);
      apply(OP_SUB, 0, 0, x, z); e = to_bf16(ra - rb);
      if (ra - rb == 0.0) e = (x[15] & ~z[15]) ? 16'h8000 : 16'h0000;
      expect_eq("sub", e);
      apply(OP_MUL, 0, 0, x, z); e = to_bf16(ra * rb);
      if (ra == 0.0 || rb == 0.0) e = {x[15] ^ z[15], 15'd0};
      expect_eq("mul", e);
      if (rb != 0.0) begin
        apply(OP_DIV, 0, 0, x, z); e = to_bf16(ra / rb);
        if (ra == 0.0) e = {x[15] ^ z[15], 15'd0};
        expect_eq("div", e);
      end
      apply(OP_GTH, 0, 0, x, z); expect_eq("gth", (ra > rb) ? 16'h3F80 : 16'h0000);
      apply(OP_EQL, 0, 0, x, z); expect_eq("eql", (ra == rb) ? 16'h3F80 : 16'h0000);
      apply(OP_MAX, 0, 0, x, z); checks++; if (to_real(y) != ((ra > rb) ? ra : rb)) failures++;
      apply(OP_MIN, 0, 0, x, z); checks++; if (to_real(y) != ((ra < rb) ? ra : rb)) failures++;
      apply(OP_ABS, 0, 0, x, z); checks++; if (to_real(y) != ((ra < 0.0) ? -ra : ra)) failures++;
      // rounding to integer, halves away from zero
      x = {1'($urandom), 8'($urandom_range(135, 118)), 7'($urandom)};
      ra = to_real(x);
      rr = (ra < 0.0) ? -$floor(-ra + 0.5) : $floor(ra + 0.5);
      apply(OP_RND, 0, 0, x, z); checks++;
      if (to_real(y) != rr) begin
        failures++;
        if (failures < 20) $display("FAIL rnd %h -> %h exp %f", x, y, rr);
      end
      // bitwise and shifts
      x = 16'($urandom); z = 16'($urandom);
      apply(OP_AND, 0, 0, x, z); expect_eq("and", x & z);
      apply(OP_ORR, 0, 0, x, z); expect_eq("orr", x | z);
      apply(OP_SHL, 0, 0, x, z); expect_eq("shl", 16'(x * (2 ** int'(z[3:0]))));
      apply(OP_SHR, 0, 0, x, z); expect_eq("shr", 16'(x / (2 ** int'(z[3:0]))));
      // integer to BF16
      apply(OP_I2F, 0, I2F_INT16, x, z);  expect_eq("i2f16", to_bf16(real'(int'(signed'(x)))));
      apply(OP_I2F, 0, I2F_INT8_1, x, z); expect_eq("i2f8h", to_bf16(real'(s8(x[15:8]))));
      apply(OP_I2F, 0, 6'd6, x, z);       expect_eq("i2f4", to_bf16(real'(int'(signed'(x[11:8])))));
      // 2xINT8
      ia = s8(x[7:0]); ib = s8(z[7:0]);
      apply(OP_ADD, 1, 0, x, z);
      expect_eq("i8add", {sat(s8(x[15:8]) + s8(z[15:8])), sat(ia + ib)});
      apply(OP_SUB, 1, 0, x, z);
      expect_eq("i8sub", {sat(s8(x[15:8]) - s8(z[15:8])), sat(ia - ib)});
      apply(OP_MUL, 1, 0, x, z);
      expect_eq("i8mul", {sat(s8(x[15:8]) * s8(z[15:8])), sat(ia * ib)});
      apply(OP_GTH, 1, 0, x, z);
      expect_eq("i8gth", {8'(s8(x[15:8]) > s8(z[15:8])), 8'(ia > ib)});
      l1 = (s8(x[15:8]) > s8(z[15:8])) ? x[15:8] : z[15:8];
      l0 = (ia > ib) ? x[7:0] : z[7:0];
      apply(OP_MAX, 1, 0, x, z); expect_eq("i8max", {l1, l0});
      if (z[7:0] != 0 && z[15:8] != 0) begin
        apply(OP_DIV, 1, 0, x, z);
        expect_eq("i8div", {sat(s8(x[15:8]) / s8(z[15:8])), sat(ia / ib)});
      end
    end
    // special values
    apply(OP_DIV, 0, 0, 16'h3F80, 16'h0000); expect_eq("1/0", 16'h7F80);
    apply(OP_DIV, 0, 0, 16'h0000, 16'h0000); expect_eq("0/0", 16'h7FC0);
    apply(OP_SUB, 0, 0, 16'h7F80, 16'h7F80); expect_eq("inf-inf", 16'h7FC0);
    apply(OP_MUL, 0, 0, 16'h7100, 16'h7100); expect_eq("ovf", 16'h7F80);
    apply(OP_MUL, 0, 0, 16'h0D00, 16'h0D00); expect_eq("unf", 16'h0000);
    apply(OP_ADD, 0, 0, 16'h3F80, 16'h3B80); expect_eq("1+2^-8 tie-even", 16'h3F80);
    apply(OP_ADD, 0, 0, 16'h3F81, 16'h3B80); expect_eq("tie-odd", 16'h3F82);
    apply(OP_RND, 0, 0, 16'h3FC0, 0);        expect_eq("rnd1.5", 16'h4000);
    apply(OP_RND, 0, 0, 16'hBF00, 0);        expect_eq("rnd-0.5", 16'hBF80);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

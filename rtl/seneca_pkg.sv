// seneca_pkg -- types, constants and BrainFloat16 arithmetic shared by the
// neuromorphic core.
//
// The core runs spiking-neural-network micro-kernels on a row of Neuron
// Processing Elements (NPEs). Every NPE instruction works on 16-bit registers
// that hold either one BrainFloat16 (BF16: 1 sign, 8 exponent, 7 fraction
// bits) or two signed 8-bit integers. The instruction set (ADD/SUB/MUL/DIV,
// GTH/MAX/MIN/EQL/ABS, AND/ORR/SHL/SHR, I2F, RND, EVC, MLD, MST) and the
// 8 NPEs x 64 registers x 16 bits follow the published core; the binary
// instruction layout below, the AER word layout and the NoC packet layout are
// this implementation's own, since no encoding is published.
//
// BF16 rounding here is round-to-nearest-even. Subnormal inputs are read as
// zero and results below the smallest normal number are flushed to a signed
// zero; overflow gives infinity; any NaN operand gives the quiet NaN 16'h7FC0.
package seneca_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NPE_N      = 8;     // NPEs per core
  localparam int unsigned NPE_REGS   = 64;    // registers per NPE
  localparam int unsigned DW         = 16;    // register / lane width
  localparam int unsigned DMEM_WORDS = 8192;  // data memory, 32-bit words
  localparam int unsigned IMEM_WORDS = 8192;  // instruction memory, 32-bit words

  // ---------------------------------------------------------------- opcodes
  typedef enum logic [4:0] {
    OP_NOP = 5'd0,
    OP_ADD = 5'd1,  OP_SUB = 5'd2,  OP_MUL = 5'd3,  OP_DIV = 5'd4,
    OP_GTH = 5'd5,  OP_MAX = 5'd6,  OP_MIN = 5'd7,  OP_EQL = 5'd8,
    OP_ABS = 5'd9,  OP_AND = 5'd10, OP_ORR = 5'd11, OP_SHL = 5'd12,
    OP_SHR = 5'd13, OP_I2F = 5'd14, OP_RND = 5'd15, OP_EVC = 5'd16,
    OP_MLD = 5'd17, OP_MST = 5'd18
  } npe_op_e;

  // One micro-kernel instruction (30 bits), broadcast to every NPE.
  //   ALU ops : rd <- ra op rb            (ABS, RND, I2F use ra only)
  //   I2F     : rb holds the source-field selector, not a register number
  //   MLD     : rd <- mem[ADDR[areg]];    ADDR[areg] += inc
  //   MST     : mem[ADDR[areg]] <- ra;    ADDR[areg] += inc
  //   EVC     : capture ra as a possible event
  //   i8      : treat registers as two signed 8-bit lanes (2xINT8 mode)
  typedef struct packed {
    npe_op_e    op;
    logic       i8;
    logic [5:0] rd;
    logic [5:0] ra;
    logic [5:0] rb;
    logic [1:0] areg;
    logic [3:0] inc;
  } npe_instr_t;

  localparam int unsigned INSTR_W = $bits(npe_instr_t);

  // I2F source-field selectors (carried in the rb field)
  localparam logic [5:0] I2F_INT16  = 6'd0;
  localparam logic [5:0] I2F_INT8_0 = 6'd1;  // bits  7:0
  localparam logic [5:0] I2F_INT8_1 = 6'd2;  // bits 15:8
  localparam logic [5:0] I2F_INT4_0 = 6'd4;  // bits  3:0, then 5,6,7 for the
                                             // nibbles 7:4, 11:8, 15:12

  // Address-event representation word: neuron address and BF16 value.
  typedef struct packed {
    logic [15:0] addr;
    logic [15:0] value;
  } aer_t;

  // NoC packet: destination core coordinates plus one AER event.
  typedef struct packed {
    logic [3:0] dx;
    logic [3:0] dy;
    aer_t       ev;
  } flit_t;

  // Shared-memory request from a prefetch unit, and the response to it.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;
    logic [31:0] wdata;
  } shm_req_t;

  typedef struct packed {
    logic        gnt;     // request accepted this cycle
    logic        rvalid;  // read data returned this cycle
    logic [31:0] rdata;
  } shm_rsp_t;

  // ---------------------------------------------------------------- BF16
  localparam logic [15:0] BF16_ONE  = 16'h3F80;
  localparam logic [15:0] BF16_QNAN = 16'h7FC0;

  function automatic logic bf16_is_nan(input logic [15:0] x);
    return (x[14:7] == 8'hFF) && (x[6:0] != 7'd0);
  endfunction

  function automatic logic bf16_is_inf(input logic [15:0] x);
    return (x[14:7] == 8'hFF) && (x[6:0] == 7'd0);
  endfunction

  function automatic logic bf16_is_zero(input logic [15:0] x);
    return x[14:7] == 8'h00;  // subnormals count as zero
  endfunction

  // Normalise, round to nearest even and pack. The value is
  // m * 2^(e-31): bit 31 of m has weight 2^e. Bit 0 of m may carry a sticky
  // bit. Exponent e is unbiased.
  function automatic logic [15:0] bf16_round_pack(input logic s,
                                                  input logic signed [11:0] e,
                                                  input logic [31:0] m);
    logic [31:0] mn;
    logic signed [11:0] en;
    logic [8:0] sig;
    logic guard, sticky, rup;
    logic signed [11:0] biased;
    int unsigned lz;
    if (m == 32'd0) return {s, 15'd0};
    lz = 0;
    for (int i = 31; i >= 0; i--) begin
      if (m[i]) break;
      lz++;
    end
    mn     = m << lz;
    en     = e - 12'(lz);
    guard  = mn[23];
    sticky = |mn[22:0];
    rup    = guard & (sticky | mn[24]);
    sig    = {1'b0, mn[31:24]} + 9'(rup);
    if (sig[8]) begin
      sig = sig >> 1;
      en  = en + 12'sd1;
    end
    biased = en + 12'sd127;
    if (biased >= 12'sd255) return {s, 8'hFF, 7'd0};
    if (biased <= 12'sd0)   return {s, 15'd0};
    return {s, biased[7:0], sig[6:0]};
  endfunction

  function automatic logic [15:0] bf16_add(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] x, y;
    logic [31:0] mx, my, m;
    logic [7:0] d;
    logic sx, sy;
    if (bf16_is_nan(a) || bf16_is_nan(b)) return BF16_QNAN;
    if (bf16_is_inf(a) && bf16_is_inf(b))
      return (a[15] == b[15]) ? a : BF16_QNAN;
    if (bf16_is_inf(a)) return a;
    if (bf16_is_inf(b)) return b;
    if (bf16_is_zero(a) && bf16_is_zero(b)) return {a[15] & b[15], 15'd0};
    if (bf16_is_zero(a)) return b;
    if (bf16_is_zero(b)) return a;
    // x gets the larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    sx = x[15];
    sy = y[15];
    mx = {1'b0, 1'b1, x[6:0], 23'd0};
    my = {1'b0, 1'b1, y[6:0], 23'd0};
    d  = x[14:7] - y[14:7];
    if (d >= 8'd31) my = 32'd1;  // only a sticky bit is left
    else my = (my >> d) | 32'(|(my & ((32'd1 << d) - 32'd1)));
    m = (sx == sy) ? mx + my : mx - my;
    if (m == 32'd0) return 16'h0000;
    return bf16_round_pack(sx, 12'(x[14:7]) - 12'sd126, m);
  endfunction

  function automatic logic [15:0] bf16_mul(input logic [15:0] a, input logic [15:0] b);
    logic s;
    logic [15:0] p;
    s = a[15] ^ b[15];
    if (bf16_is_nan(a) || bf16_is_nan(b)) return BF16_QNAN;
    if ((bf16_is_inf(a) && bf16_is_zero(b)) || (bf16_is_zero(a) && bf16_is_inf(b)))
      return BF16_QNAN;
    if (bf16_is_inf(a) || bf16_is_inf(b)) return {s, 8'hFF, 7'd0};
    if (bf16_is_zero(a) || bf16_is_zero(b)) return {s, 15'd0};
    p = {8'd0, 1'b1, a[6:0]} * {8'd0, 1'b1, b[6:0]};
    return bf16_round_pack(s, 12'(a[14:7]) + 12'(b[14:7]) - 12'sd253, {p, 16'd0});
  endfunction

  function automatic logic [15:0] bf16_div(input logic [15:0] a, input logic [15:0] b);
    logic s;
    logic [31:0] q, r, num, den;
    s = a[15] ^ b[15];
    if (bf16_is_nan(a) || bf16_is_nan(b)) return BF16_QNAN;
    if ((bf16_is_inf(a) && bf16_is_inf(b)) || (bf16_is_zero(a) && bf16_is_zero(b)))
      return BF16_QNAN;
    if (bf16_is_inf(a) || bf16_is_zero(b)) return {s, 8'hFF, 7'd0};
    if (bf16_is_zero(a) || bf16_is_inf(b)) return {s, 15'd0};
    num = {1'b1, a[6:0], 24'd0};
    den = {24'd0, 1'b1, b[6:0]};
    q = num / den;
    r = num % den;
    return bf16_round_pack(s, 12'(a[14:7]) - 12'(b[14:7]) + 12'sd7,
                           {q[31:1], q[0] | (r != 32'd0)});
  endfunction

  // Ordering key: larger key means larger number (zeros merged, NaN excluded).
  function automatic logic [15:0] bf16_key(input logic [15:0] x);
    if (bf16_is_zero(x)) return 16'h8000;
    return x[15] ? ~x : {1'b1, x[14:0]};
  endfunction

  function automatic logic bf16_gt(input logic [15:0] a, input logic [15:0] b);
    if (bf16_is_nan(a) || bf16_is_nan(b)) return 1'b0;
    return bf16_key(a) > bf16_key(b);
  endfunction

  function automatic logic bf16_eq(input logic [15:0] a, input logic [15:0] b);
    if (bf16_is_nan(a) || bf16_is_nan(b)) return 1'b0;
    return bf16_key(a) == bf16_key(b);
  endfunction

  // Signed integer (as a 17-bit two's complement value) to BF16.
  function automatic logic [15:0] bf16_from_int(input logic signed [16:0] v);
    logic [16:0] mag;
    if (v == 17'sd0) return 16'h0000;
    mag = v[16] ? 17'(-v) : 17'(v);
    return bf16_round_pack(v[16], 12'sd16, {mag[16:0], 15'd0});
  endfunction

  // Round to the nearest integer, halves away from zero.
  function automatic logic [15:0] bf16_rnd(input logic [15:0] a);
    logic signed [11:0] e;
    logic [7:0] sig;
    logic [8:0] iv;
    int unsigned sh;
    if (bf16_is_zero(a)) return {a[15], 15'd0};
    e = 12'(a[14:7]) - 12'sd127;
    if (e >= 12'sd7) return a;            // already an integer, or Inf/NaN
    if (e < -12'sd1) return {a[15], 15'd0};
    sig = {1'b1, a[6:0]};
    sh  = 32'(7 - e);                      // 1 .. 8
    iv  = 9'(sig >> sh) + 9'(sig[sh-1]);
    return bf16_round_pack(a[15], 12'sd8, {iv, 23'd0});
  endfunction

  // ---------------------------------------------------------------- INT8
  function automatic logic [7:0] sat8(input logic signed [17:0] v);
    if (v > 18'sd127)  return 8'h7F;
    if (v < -18'sd128) return 8'h80;
    return v[7:0];
  endfunction

  function automatic logic [7:0] int8_op(input npe_op_e op, input logic [7:0] a, input logic [7:0] b);
    logic signed [17:0] sa, sb;
    sa = 18'(signed'(a));
    sb = 18'(signed'(b));
    unique case (op)
      OP_ADD: return sat8(sa + sb);
      OP_SUB: return sat8(sa - sb);
      OP_MUL: return sat8(sa * sb);
      OP_DIV: return (sb == 18'sd0) ? (sa[17] ? 8'h80 : 8'h7F) : sat8(sa / sb);
      OP_GTH: return (sa > sb) ? 8'd1 : 8'd0;
      OP_MAX: return (sa > sb) ? a : b;
      OP_MIN: return (sa < sb) ? a : b;
      OP_EQL: return (a == b) ? 8'd1 : 8'd0;
      OP_ABS: return sat8(sa[17] ? -sa : sa);
      default: return a;
    endcase
  endfunction

endpackage

// npe_alu -- the arithmetic of one Neuron Processing Element.
//
// Combinational: y is a function of the opcode, the 2xINT8 flag and the two
// 16-bit operands. In BF16 mode it implements ADD/SUB/MUL/DIV, the compares
// GTH/EQL (result 1.0 or 0.0, so a compare can gate a value with a MUL, as
// the integrate-and-fire micro-kernel does), MAX/MIN, ABS, the bitwise
// AND/ORR, the logical shifts SHL/SHR (shift amount in b[3:0]), I2F and RND.
// In 2xINT8 mode (i8 = 1) the arithmetic and compare ops work on two signed
// 8-bit lanes, saturating; bitwise ops, shifts, I2F and RND ignore the flag.
// EVC, MLD and MST pass a through (EVC and MST use it as their value).
//
// The op list and the BF16 / 2xINT8 data types are the published ones;
// rounding, the NaN/subnormal policy, saturation in INT8 mode, what a
// compare returns, and the I2F field selector (sel) are choices of this
// implementation. The core issues one instruction per cycle, so the whole
// datapath here is evaluated in one clock period.
module npe_alu
  import seneca_pkg::*;
(
  input  npe_op_e     op,
  input  logic        i8,   // 2xINT8 mode
  input  logic [5:0]  sel,  // I2F source field
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);

  logic signed [16:0] i2f_src;

  always_comb begin
    unique case (sel)
      I2F_INT8_0: i2f_src = 17'(signed'(a[7:0]));
      I2F_INT8_1: i2f_src = 17'(signed'(a[15:8]));
      6'd4:       i2f_src = 17'(signed'(a[3:0]));
      6'd5:       i2f_src = 17'(signed'(a[7:4]));
      6'd6:       i2f_src = 17'(signed'(a[11:8]));
      6'd7:       i2f_src = 17'(signed'(a[15:12]));
      default:    i2f_src = 17'(signed'(a));
    endcase
  end

  always_comb begin
    y = a;
    if (i8 && (op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_GTH, OP_MAX,
                          OP_MIN, OP_EQL, OP_ABS})) begin
      y = {int8_op(op, a[15:8], b[15:8]), int8_op(op, a[7:0], b[7:0])};
    end else begin
      unique case (op)
        OP_ADD: y = bf16_add(a, b);
        OP_SUB: y = bf16_add(a, bf16_is_nan(b) ? b : {~b[15], b[14:0]});
        OP_MUL: y = bf16_mul(a, b);
        OP_DIV: y = bf16_div(a, b);
        OP_GTH: y = bf16_gt(a, b) ? BF16_ONE : 16'h0000;
        OP_EQL: y = bf16_eq(a, b) ? BF16_ONE : 16'h0000;
        OP_MAX: y = (bf16_is_nan(a) || bf16_is_nan(b)) ? BF16_QNAN :
                    (bf16_gt(b, a) ? b : a);
        OP_MIN: y = (bf16_is_nan(a) || bf16_is_nan(b)) ? BF16_QNAN :
                    (bf16_gt(a, b) ? b : a);
        OP_ABS: y = {1'b0, a[14:0]};
        OP_AND: y = a & b;
        OP_ORR: y = a | b;
        OP_SHL: y = a << b[3:0];
        OP_SHR: y = a >> b[3:0];
        OP_I2F: y = bf16_from_int(i2f_src);
        OP_RND: y = bf16_rnd(a);
        default: y = a;
      endcase
    end
  end

endmodule

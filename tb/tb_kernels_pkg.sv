// tb_kernels_pkg -- the micro-kernels of the published neuron models and
// learning rules, written as loop-buffer instructions, for the testbenches.
//
//   K_IF_INT   spike integration     v += w                (integrate-and-fire)
//   K_IF_GEN   spike generation      s = v > th; v -= v*s; EVC(s)
//   K_SD_SIG   sigma integration     z += w * o_in        (sigma-delta)
//   K_SD_DEL   delta                 q = round(max(z,0)/q)*q; EVC(q - q_old)
//   K_HEB_W    Hebbian weight update w += eta * tr_out * tr_in
//   K_HEB_TR   spike trace update    tr = beta*tr + (1-beta)*s
//   K_EP_ELIG  e-prop eligibility    e += h(v) * tr_in
//   K_EP_W     e-prop weight update  w -= eta * e * err
// Register roles (R1 threshold, R2 input value, R3 q / eta, ...) are as in
// the published listings; the controller sets them before a kernel runs.
package tb_kernels_pkg;
  import seneca_pkg::*;
  import tb_util_pkg::*;

  localparam int K_IF_INT = 0, K_IF_GEN = 1, K_SD_SIG = 2, K_SD_DEL = 3,
                 K_HEB_W = 4, K_HEB_TR = 5, K_EP_ELIG = 6, K_EP_W = 7;

  localparam int KSTART [8] = '{0, 4, 10, 15, 24, 30, 36, 46};
  localparam int KLEN   [8] = '{4, 6, 5, 9, 6, 6, 10, 7};

  function automatic npe_instr_t kernel_instr(input int k, input int i);
    npe_instr_t p [];
    case (k)
      K_IF_INT:  p = '{mld(0, 1, 1), mld(1, 2, 0), ins(OP_ADD, 1, 0, 1), mst(2, 1, 1)};
      K_IF_GEN:  p = '{mld(0, 1, 0), ins(OP_GTH, 2, 0, 1), ins(OP_MUL, 3, 2, 0),
                       ins(OP_SUB, 0, 0, 3), mst(1, 0, 1), evc(2)};
      K_SD_SIG:  p = '{mld(0, 1, 1), mld(1, 2, 0), ins(OP_MUL, 3, 0, 2),
                       ins(OP_ADD, 1, 1, 3), mst(2, 1, 1)};
      K_SD_DEL:  p = '{mld(0, 1, 1), mld(1, 2, 0), ins(OP_MAX, 0, 0, 2), ins(OP_DIV, 0, 0, 3),
                       ins(OP_RND, 0, 0), ins(OP_MUL, 0, 0, 3), ins(OP_SUB, 3, 0, 1),
                       mst(2, 0, 1), evc(3)};
      K_HEB_W:   p = '{mld(0, 1, 0), mld(1, 2, 1), ins(OP_MUL, 1, 1, 2), ins(OP_MUL, 1, 1, 3),
                       ins(OP_ADD, 0, 0, 1), mst(1, 0, 1)};
      K_HEB_TR:  p = '{mld(0, 1, 0), mld(1, 2, 1), ins(OP_MUL, 0, 0, 2), ins(OP_MUL, 1, 1, 3),
                       ins(OP_ADD, 0, 0, 1), mst(1, 0, 1)};
      K_EP_ELIG: p = '{mld(0, 1, 0), mld(1, 2, 1), mld(2, 3, 1), ins(OP_SUB, 2, 2, 3),
                       ins(OP_ABS, 2, 2), ins(OP_GTH, 2, 4, 2), ins(OP_MUL, 2, 2, 5),
                       ins(OP_MUL, 2, 2, 1), ins(OP_ADD, 0, 0, 2), mst(1, 0, 1)};
      default:   p = '{mld(0, 1, 0), mld(1, 2, 1), mld(2, 3, 1), ins(OP_MUL, 1, 3, 1),
                       ins(OP_MUL, 2, 2, 1), ins(OP_SUB, 0, 0, 2), mst(1, 0, 1)};
    endcase
    return p[i];
  endfunction

  // Reference interpreter of one instruction on one lane, in double
  // precision with BF16 rounding after every operation.
  function automatic logic [15:0] ref_alu(input npe_op_e op, input logic [15:0] a,
                                          input logic [15:0] b);
    real x, y, r;
    x = bf2r(a); y = bf2r(b);
    case (op)
      OP_ADD: return r2bf(x + y);
      OP_SUB: return r2bf(x - y);
      OP_MUL: return r2bf(x * y);
      OP_DIV: return r2bf(x / y);
      OP_GTH: return (x > y) ? 16'h3F80 : 16'h0000;
      OP_MAX: return (x >= y) ? a : b;
      OP_ABS: return {1'b0, a[14:0]};
      OP_RND: begin
        r = (x < 0.0) ? -$floor(-x + 0.5) : $floor(x + 0.5);
        return r2bf(r);
      end
      default: return a;
    endcase
  endfunction
endpackage

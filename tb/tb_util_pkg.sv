// tb_util_pkg -- helpers shared by the testbenches: BF16 <-> real
// conversion done with double-precision arithmetic (independent of the RTL's
// integer BF16 datapath), and a constructor for micro-kernel instructions.
package tb_util_pkg;
  import seneca_pkg::*;

  function automatic real bf2r(input logic [15:0] x);
    logic [63:0] d;
    if (x[14:7] == 8'd0) return 0.0;
    d = {x[15], 11'(int'(x[14:7]) - 127 + 1023), x[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  // double -> BF16, round to nearest even, flush below the normal range
  function automatic logic [15:0] r2bf(input real r);
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

  function automatic npe_instr_t ins(input npe_op_e op, input int rd = 0, input int ra = 0,
                                     input int rb = 0, input int areg = 0, input int inc = 0,
                                     input bit i8 = 0);
    npe_instr_t t;
    t.op = op; t.i8 = i8; t.rd = 6'(rd); t.ra = 6'(ra); t.rb = 6'(rb);
    t.areg = 2'(areg); t.inc = 4'(inc);
    return t;
  endfunction

  // MLD(Rd, ADDa, inc) / MST(ADDa, Rs, inc) / EVC(Rs), as written in micro-kernels
  function automatic npe_instr_t mld(input int rd, input int areg, input int inc);
    return ins(OP_MLD, rd, 0, 0, areg, inc);
  endfunction
  function automatic npe_instr_t mst(input int areg, input int rs, input int inc);
    return ins(OP_MST, 0, rs, 0, areg, inc);
  endfunction
  function automatic npe_instr_t evc(input int rs);
    return ins(OP_EVC, 0, rs);
  endfunction
endpackage

// npe -- one Neuron Processing Element (NPE).
//
// An NPE holds a 64 x 16-bit register file and an npe_alu. All NPEs of a
// core receive the same instruction from the loop buffer in the same cycle
// (SIMD); each works on its own 16-bit lane of the data memory's wide port B.
// One instruction is issued per cycle:
//   * ALU op : operands read, result written to rd at the end of the cycle.
//   * MLD    : the memory row is read at the end of the issue cycle; the lane
//              arrives on mem_rdata during the next cycle and is written to rd
//              at the end of that cycle. An instruction issued in that next
//              cycle that reads rd takes mem_rdata directly (load-use bypass),
//              so a kernel such as MLD R1 / ADD R1,R0,R1 runs without a bubble.
//              If an ALU op issued in that cycle writes the same rd, it wins.
//   * MST    : the value of ra is driven on mem_wdata during the issue cycle.
//   * EVC    : the value of ra is driven on evc_value during the issue cycle.
// The controller can read and write any register through the cfg port; a
// write is applied only when no instruction writes the register that cycle.
//
// The register count, the 16-bit width, the SIMD arrangement and the one
// instruction per cycle follow the published core; the two-step load timing
// and the bypass are this implementation's way of meeting that rate.
module npe
  import seneca_pkg::*;
#(
  parameter int unsigned NREGS = NPE_REGS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        issue,       // an instruction is issued this cycle
  input  npe_instr_t  instr,
  input  logic [15:0] mem_rdata,   // this NPE's lane of data-memory port B
  output logic [15:0] mem_wdata,   // lane written by MST
  output logic [15:0] evc_value,   // value offered to the event generator by EVC
  output logic        bypass,      // an operand was taken from the load bypass
  input  logic        cfg_we,
  input  logic [5:0]  cfg_addr,
  input  logic [15:0] cfg_wdata,
  output logic [15:0] cfg_rdata
);

  localparam int unsigned RW = $clog2(NREGS);

  logic [15:0] rf [NREGS];
  logic        ld_pend;
  logic [RW-1:0] ld_rd;
  logic [15:0] opa, opb, alu_y;
  logic        fwd_a, fwd_b, alu_wr;
  logic [RW-1:0] ra, rb, rd;

  assign ra = instr.ra[RW-1:0];
  assign rb = instr.rb[RW-1:0];
  assign rd = instr.rd[RW-1:0];

  assign fwd_a = ld_pend && (ld_rd == ra);
  assign fwd_b = ld_pend && (ld_rd == rb);
  assign opa   = fwd_a ? mem_rdata : rf[ra];
  assign opb   = fwd_b ? mem_rdata : rf[rb];

  // the rb field is a selector, not a register, for I2F; ra only for ABS/RND
  assign bypass = issue && ((fwd_a && (instr.op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV,
                    OP_GTH, OP_MAX, OP_MIN, OP_EQL, OP_ABS, OP_AND, OP_ORR, OP_SHL,
                    OP_SHR, OP_I2F, OP_RND, OP_EVC, OP_MST})) ||
                  (fwd_b && (instr.op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_GTH,
                    OP_MAX, OP_MIN, OP_EQL, OP_AND, OP_ORR, OP_SHL, OP_SHR})));

  npe_alu u_alu (
    .op (instr.op),
    .i8 (instr.i8),
    .sel(instr.rb),
    .a  (opa),
    .b  (opb),
    .y  (alu_y)
  );

  assign alu_wr    = issue && !(instr.op inside {OP_NOP, OP_EVC, OP_MLD, OP_MST});
  assign mem_wdata = opa;
  assign evc_value = opa;
  assign cfg_rdata = rf[cfg_addr[RW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_pend <= 1'b0;
      ld_rd   <= '0;
      for (int i = 0; i < NREGS; i++) rf[i] <= '0;
    end else begin
      ld_pend <= issue && (instr.op == OP_MLD);
      if (issue && instr.op == OP_MLD) ld_rd <= rd;
      if (cfg_we && !(ld_pend && ld_rd == cfg_addr[RW-1:0]) &&
          !(alu_wr && rd == cfg_addr[RW-1:0]))
        rf[cfg_addr[RW-1:0]] <= cfg_wdata;
      if (ld_pend) rf[ld_rd] <= mem_rdata;
      if (alu_wr)  rf[rd] <= alu_y;    // later in program order: wins
    end
  end

endmodule

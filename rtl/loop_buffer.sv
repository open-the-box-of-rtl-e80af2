// loop_buffer -- micro-kernel store and sequencer of the core.
//
// The controller writes micro-kernel instructions into a small register
// file (prog_*) and describes up to N_KERNELS kernels in a kernel table
// (start slot and length, ktab_*). It then sets the iteration count and the
// data-memory address registers ADD0..ADD3 and starts one kernel by its
// number. The loop buffer replays that kernel "for-loop" fashion: the whole
// instruction sequence once per iteration, one instruction per cycle,
// broadcast to all NPEs. An MLD or MST reads the row address of its address
// register (issue_row) and then adds the instruction's inc field to it, so
// a kernel walks through neuron states and weights without the controller.
// Each iteration therefore processes one row of N_NPE neurons.
//
// Timing: the first instruction issues the cycle after start. An EVC is held
// (stall) while the event generator is not ready for it; nothing else stalls.
// done pulses for one cycle after the last instruction of the last
// iteration; busy is high from start until then. A start while busy is
// ignored. A kernel of length 0 or an iteration count of 0 finishes at once.
//
// The loop replay, the register-file storage and the incremental address
// calculation follow the published core; the kernel table, four address
// registers, the depth and the immediate increment are this implementation's.
module loop_buffer
  import seneca_pkg::*;
#(
  parameter int unsigned LB_DEPTH  = 128,
  parameter int unsigned N_KERNELS = 8,
  localparam int unsigned PW = $clog2(LB_DEPTH),
  localparam int unsigned KW = $clog2(N_KERNELS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // programming
  input  logic          prog_we,
  input  logic [PW-1:0] prog_addr,
  input  npe_instr_t    prog_data,
  input  logic          ktab_we,
  input  logic [KW-1:0] ktab_idx,
  input  logic [PW-1:0] ktab_start,
  input  logic [PW:0]   ktab_len,
  input  logic          iters_we,
  input  logic [15:0]   iters_wdata,
  input  logic          areg_we,
  input  logic [1:0]    areg_idx,
  input  logic [15:0]   areg_wdata,
  output logic [15:0]   areg_rdata [4],
  // control
  input  logic          start,
  input  logic [KW-1:0] start_kernel,
  output logic          busy,
  output logic          done,
  // issue to the NPEs
  input  logic          evc_ready,   // event generator can take an EVC
  output logic          issue,
  output npe_instr_t    issue_instr,
  output logic [15:0]   issue_row,   // data-memory row for MLD / MST
  output logic [15:0]   issue_iter,  // iteration of the issued instruction
  output logic          stall
);

  npe_instr_t  lb [LB_DEPTH];
  logic [PW-1:0] kstart [N_KERNELS];
  logic [PW:0]   klen   [N_KERNELS];
  logic [15:0]   areg   [4];
  logic [15:0]   iters, iter;
  logic [PW-1:0] pc, pc_first;
  logic [PW:0]   pos, len;
  logic          last_instr, last_iter;

  assign issue_instr = lb[pc];
  assign stall       = busy && (issue_instr.op == OP_EVC) && !evc_ready;
  assign issue       = busy && !stall;
  assign issue_row   = areg[issue_instr.areg];
  assign issue_iter  = iter;
  assign last_instr  = (pos == len - 1'b1);
  assign last_iter   = (iter == iters - 1'b1);
  assign areg_rdata  = areg;

  always_ff @(posedge clk) begin
    if (prog_we) lb[prog_addr] <= prog_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      iters <= '0;
      iter  <= '0;
      pc    <= '0;
      pc_first <= '0;
      pos   <= '0;
      len   <= '0;
      for (int k = 0; k < N_KERNELS; k++) begin
        kstart[k] <= '0;
        klen[k]   <= '0;
      end
      for (int r = 0; r < 4; r++) areg[r] <= '0;
    end else begin
      done <= 1'b0;
      if (ktab_we) begin
        kstart[ktab_idx] <= ktab_start;
        klen[ktab_idx]   <= ktab_len;
      end
      if (iters_we) iters <= iters_wdata;
      if (areg_we && !busy) areg[areg_idx] <= areg_wdata;

      if (!busy) begin
        if (start) begin
          if (klen[start_kernel] == '0 || iters == '0) begin
            done <= 1'b1;
          end else begin
            busy     <= 1'b1;
            pc       <= kstart[start_kernel];
            pc_first <= kstart[start_kernel];
            len      <= klen[start_kernel];
            pos      <= '0;
            iter     <= '0;
          end
        end
      end else if (issue) begin
        if (issue_instr.op inside {OP_MLD, OP_MST})
          areg[issue_instr.areg] <= areg[issue_instr.areg] + 16'(issue_instr.inc);
        if (last_instr) begin
          pos <= '0;
          pc  <= pc_first;
          if (last_iter) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            iter <= iter + 1'b1;
          end
        end else begin
          pos <= pos + 1'b1;
          pc  <= pc + 1'b1;
        end
      end
    end
  end

endmodule

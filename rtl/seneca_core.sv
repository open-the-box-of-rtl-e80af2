// seneca_core -- one neuromorphic core: NPE array, loop buffer, memories,
// event generator, event FIFOs, NoC interface and shared-memory prefetch.
//
// How an event is processed: an incoming event wakes the core's controller
// (a RISC-V processor outside this module, see below), which writes the
// event's data into NPE registers, sets the loop-buffer address registers
// and starts the micro-kernel that handles this type of event. The loop
// buffer then issues the kernel to all N_NPE NPEs at once, one instruction
// per cycle and one row of neurons per iteration, with MLD/MST going to the
// wide port B of the data memory. EVC instructions hand non-zero results to
// the event generator, which queues them as AER events in the event FIFO and
// interrupts the controller; the controller forwards them through the NoC
// interface, whose routing table decides the destination core.
//
// The controller is not part of this module. Its two ports are brought out:
// the instruction-memory port (im_*) and a simple register bus (bus_*), with
// which it reaches everything else. Bus protocol: one access per cycle;
// bus_we writes bus_wdata; bus_re reads, the data appearing on bus_rdata with
// bus_rvalid one cycle later. Word-address map (16-bit address):
//   0x0000-0x1FFF  data memory, port A (32-bit words)
//   0x2000+i       loop-buffer instruction i   (wdata[29:0], npe_instr_t)
//   0x2100+k       kernel table entry k        (wdata[7:0] start, [15:8] length)
//   0x2200 W       iteration count
//   0x2201 W       event base address (neuron address of NPE 0, iteration 0)
//   0x2202 W       start kernel wdata[2:0]
//   0x2203 R       status: [0] loop buffer busy, [1] event FIFO empty,
//                  [2] NoC receive FIFO empty, [3] NoC transmit FIFO full,
//                  [4] prefetch busy, [5] event generator idle (all events
//                  of the last EVC are in the event FIFO), [12:8] events waiting
//   0x2204 R       pop one event from the event FIFO (AER word)
//   0x2205 W       push one event into the NoC transmit FIFO
//   0x2206 R       pop one event from the NoC receive FIFO
//   0x2207-0x2209 W prefetch external address, local address, length
//   0x220A W       prefetch start, wdata[0] = direction (1 = write back)
//   0x2210+r RW    loop-buffer address register ADDr (data-memory row)
//   0x2300+e W     routing-table entry e
//   0x4000+64n+r RW register r of NPE n; n = 15 writes all NPEs
// NPE registers and address registers are not written while a kernel runs.
// Interrupts: irq_evt (events waiting), irq_noc (NoC events received),
// irq_done (pulse: kernel finished), irq_pf (pulse: prefetch finished).
//
// The block structure, the NPE count, memory sizes and the event flow follow
// the published core; the register map, bus and interrupt details are this
// implementation's.
module seneca_core
  import seneca_pkg::*;
#(
  parameter int unsigned N_NPE      = NPE_N,
  parameter int unsigned NREGS      = NPE_REGS,
  parameter int unsigned DM_WORDS   = DMEM_WORDS,
  parameter int unsigned IM_WORDS   = IMEM_WORDS,
  parameter int unsigned LB_DEPTH   = 128,
  parameter int unsigned N_KERNELS  = 8,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned RT_ENTRIES = 64,
  localparam int unsigned DAW = $clog2(DM_WORDS),
  localparam int unsigned IAW = $clog2(IM_WORDS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // controller register bus
  input  logic           bus_we,
  input  logic           bus_re,
  input  logic [15:0]    bus_addr,
  input  logic [31:0]    bus_wdata,
  output logic [31:0]    bus_rdata,
  output logic           bus_rvalid,
  // controller instruction memory port
  input  logic           im_en,
  input  logic           im_we,
  input  logic [IAW-1:0] im_addr,
  input  logic [31:0]    im_wdata,
  output logic [31:0]    im_rdata,
  // interrupts to the controller
  output logic           irq_evt,
  output logic           irq_noc,
  output logic           irq_done,
  output logic           irq_pf,
  // router local port
  output logic           noc_out_valid,
  output flit_t          noc_out_flit,
  input  logic           noc_out_ready,
  input  logic           noc_in_valid,
  input  flit_t          noc_in_flit,
  output logic           noc_in_ready,
  // shared memory
  output shm_req_t       shm_req,
  input  shm_rsp_t       shm_rsp,
  // activity, for observation
  output logic           obs_stall,
  output logic           obs_bypass,
  output logic           obs_drop
);

  localparam int unsigned ROWS = DM_WORDS * 2 / N_NPE;
  localparam int unsigned BAW  = $clog2(ROWS);
  localparam int unsigned PW   = $clog2(LB_DEPTH);
  localparam int unsigned KW   = $clog2(N_KERNELS);
  localparam int unsigned EW   = $clog2(FIFO_DEPTH);

  // ---------------------------------------------------------------- decode
  logic acc, dm_sel, lb_sel, kt_sel, ctl_sel, rt_sel, npe_sel;
  assign acc     = bus_we || bus_re;
  assign dm_sel  = (bus_addr[15:13] == 3'b000) && (32'(bus_addr) < DM_WORDS);
  assign lb_sel  = (bus_addr[15:8] == 8'h20);
  assign kt_sel  = (bus_addr[15:8] == 8'h21);
  assign ctl_sel = (bus_addr[15:8] == 8'h22);
  assign rt_sel  = (bus_addr[15:8] == 8'h23);
  assign npe_sel = (bus_addr[15:10] == 6'b010000);

  localparam int unsigned NSW = (N_NPE > 1) ? $clog2(N_NPE) : 1;
  logic [3:0] npe_idx;
  assign npe_idx = bus_addr[9:6];

  // ---------------------------------------------------------------- blocks
  logic          lb_busy, lb_done, issue, stall, evc_ready;
  npe_instr_t    instr;
  logic [15:0]   issue_row, issue_iter;
  logic [15:0]   areg_rd [4];
  logic [15:0]   evt_base;

  loop_buffer #(.LB_DEPTH(LB_DEPTH), .N_KERNELS(N_KERNELS)) u_lb (
    .clk, .rst_n,
    .prog_we    (bus_we && lb_sel),
    .prog_addr  (bus_addr[PW-1:0]),
    .prog_data  (npe_instr_t'(bus_wdata[INSTR_W-1:0])),
    .ktab_we    (bus_we && kt_sel),
    .ktab_idx   (bus_addr[KW-1:0]),
    .ktab_start (bus_wdata[PW-1:0]),
    .ktab_len   (bus_wdata[8 +: PW+1]),
    .iters_we   (bus_we && ctl_sel && bus_addr[7:0] == 8'h00),
    .iters_wdata(bus_wdata[15:0]),
    .areg_we    (bus_we && ctl_sel && bus_addr[7:2] == 6'b000100),
    .areg_idx   (bus_addr[1:0]),
    .areg_wdata (bus_wdata[15:0]),
    .areg_rdata (areg_rd),
    .start      (bus_we && ctl_sel && bus_addr[7:0] == 8'h02),
    .start_kernel(bus_wdata[KW-1:0]),
    .busy       (lb_busy),
    .done       (lb_done),
    .evc_ready,
    .issue,
    .issue_instr(instr),
    .issue_row,
    .issue_iter,
    .stall
  );

  // data memory
  logic                a_en, a_we;
  logic [DAW-1:0]      a_addr;
  logic [31:0]         a_wdata, a_rdata;
  logic [16*N_NPE-1:0] b_wdata, b_rdata;
  logic                lm_req, lm_we, lm_gnt;
  logic [DAW-1:0]      lm_addr;
  logic [31:0]         lm_wdata;
  logic                bus_dm;

  assign bus_dm  = acc && dm_sel;
  assign lm_gnt  = lm_req && !bus_dm;
  assign a_en    = bus_dm || lm_req;
  assign a_we    = bus_dm ? bus_we : lm_we;
  assign a_addr  = bus_dm ? bus_addr[DAW-1:0] : lm_addr;
  assign a_wdata = bus_dm ? bus_wdata : lm_wdata;

  data_mem #(.WORDS(DM_WORDS), .N_NPE(N_NPE)) u_dm (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en   (issue && (instr.op inside {OP_MLD, OP_MST})),
    .b_we   (issue && (instr.op == OP_MST)),
    .b_addr (issue_row[BAW-1:0]),
    .b_wdata,
    .b_rdata
  );

  inst_mem #(.WORDS(IM_WORDS)) u_im (
    .clk, .en(im_en), .we(im_we), .addr(im_addr), .wdata(im_wdata), .rdata(im_rdata)
  );

  // NPE array
  logic [15:0] evc_val  [N_NPE];
  logic [15:0] npe_rd   [N_NPE];
  logic [N_NPE-1:0] byp;

  for (genvar n = 0; n < N_NPE; n++) begin : g_npe
    npe #(.NREGS(NREGS)) u_npe (
      .clk, .rst_n,
      .issue,
      .instr,
      .mem_rdata(b_rdata[16*n +: 16]),
      .mem_wdata(b_wdata[16*n +: 16]),
      .evc_value(evc_val[n]),
      .bypass   (byp[n]),
      .cfg_we   (bus_we && npe_sel && !lb_busy &&
                 (npe_idx == 4'hF || npe_idx == 4'(n))),
      .cfg_addr (bus_addr[5:0]),
      .cfg_wdata(bus_wdata[15:0]),
      .cfg_rdata(npe_rd[n])
    );
  end

  // event generator and event FIFO
  logic  eg_valid, evq_full, evq_empty, evq_pop;
  aer_t  eg_data, evq_head;
  logic [EW:0] evq_count;

  event_generator #(.N_NPE(N_NPE)) u_eg (
    .clk, .rst_n,
    .base     (evt_base),
    .evc_fire (issue && instr.op == OP_EVC),
    .evc_iter (issue_iter),
    .evc_value(evc_val),
    .ready    (evc_ready),
    .ev_valid (eg_valid),
    .ev_data  (eg_data),
    .ev_ready (!evq_full)
  );

  assign evq_pop = bus_re && ctl_sel && bus_addr[7:0] == 8'h04;

  sync_fifo #(.WIDTH($bits(aer_t)), .DEPTH(FIFO_DEPTH)) u_evq (
    .clk, .rst_n,
    .push(eg_valid), .wdata(eg_data),
    .pop (evq_pop), .rdata(evq_head),
    .full(evq_full), .empty(evq_empty), .count(evq_count)
  );

  // NoC interface
  logic tx_full, rx_empty, rx_pop;
  aer_t rx_head;
  assign rx_pop = bus_re && ctl_sel && bus_addr[7:0] == 8'h06;

  noc_ni #(.DEPTH(FIFO_DEPTH), .RT_ENTRIES(RT_ENTRIES)) u_ni (
    .clk, .rst_n,
    .tx_push (bus_we && ctl_sel && bus_addr[7:0] == 8'h05),
    .tx_data (aer_t'(bus_wdata)),
    .tx_full,
    .rx_pop,
    .rx_data (rx_head),
    .rx_empty,
    .rt_we   (bus_we && rt_sel),
    .rt_widx (bus_addr[$clog2(RT_ENTRIES)-1:0]),
    .rt_wdata(bus_wdata),
    .dropped (obs_drop),
    .out_valid(noc_out_valid), .out_flit(noc_out_flit), .out_ready(noc_out_ready),
    .in_valid (noc_in_valid),  .in_flit (noc_in_flit),  .in_ready (noc_in_ready)
  );

  // prefetch unit
  logic [31:0]    pf_ext;
  logic [DAW-1:0] pf_loc;
  logic [15:0]    pf_len;
  logic           pf_busy, pf_done;

  prefetch_unit #(.LAW(DAW)) u_pf (
    .clk, .rst_n,
    .start   (bus_we && ctl_sel && bus_addr[7:0] == 8'h0A),
    .dir     (bus_wdata[0]),
    .ext_addr(pf_ext),
    .loc_addr(pf_loc),
    .len     (pf_len),
    .busy    (pf_busy),
    .done    (pf_done),
    .lm_req, .lm_we, .lm_addr, .lm_wdata, .lm_gnt,
    .lm_rdata(a_rdata),
    .shm_req, .shm_rsp
  );

  // ---------------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      evt_base <= '0;
      pf_ext   <= '0;
      pf_loc   <= '0;
      pf_len   <= '0;
    end else if (bus_we && ctl_sel) begin
      unique case (bus_addr[7:0])
        8'h01: evt_base <= bus_wdata[15:0];
        8'h07: pf_ext   <= bus_wdata;
        8'h08: pf_loc   <= bus_wdata[DAW-1:0];
        8'h09: pf_len   <= bus_wdata[15:0];
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- bus reads
  logic [31:0] rd_q;
  logic        rd_dm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q       <= '0;
      rd_dm      <= 1'b0;
      bus_rvalid <= 1'b0;
    end else begin
      bus_rvalid <= bus_re;
      rd_dm      <= bus_re && dm_sel;
      if (bus_re) begin
        rd_q <= '0;
        if (ctl_sel) begin
          unique case (bus_addr[7:0])
            8'h03: rd_q <= {19'd0, 5'(evq_count), 2'd0, evc_ready, pf_busy, tx_full, rx_empty,
                            evq_empty, lb_busy};
            8'h04: rd_q <= evq_empty ? '0 : evq_head;
            8'h06: rd_q <= rx_empty ? '0 : rx_head;
            8'h10, 8'h11, 8'h12, 8'h13: rd_q <= {16'd0, areg_rd[bus_addr[1:0]]};
            default: ;
          endcase
        end else if (npe_sel && 32'(npe_idx) < N_NPE) begin
          rd_q <= {16'd0, npe_rd[NSW'(npe_idx)]};
        end
      end
    end
  end

  assign bus_rdata = rd_dm ? a_rdata : rd_q;

  assign irq_evt    = !evq_empty;
  assign irq_noc    = !rx_empty;
  assign irq_done   = lb_done;
  assign irq_pf     = pf_done;
  assign obs_stall  = stall;
  assign obs_bypass = |byp;

endmodule

// seneca_top -- a mesh of neuromorphic cores joined by a NoC and sharing an
// external memory.
//
// MESH_X x MESH_Y cores (seneca_core), each with a five-port router
// (noc_router) at mesh position (x, y); core index c = y * MESH_X + x.
// Neighbouring routers are joined north/south/east/west; ports at the edge
// of the mesh are left unconnected. The prefetch units of all cores reach one
// shared-memory port (shm_*) through a round-robin arbiter (shmem_arbiter).
//
// Each core's RISC-V controller is outside this design: its register bus,
// its instruction-memory port and its interrupts are ports of the top, one
// array element per core. The shared memory itself (external DRAM/HBM) is
// outside as well; shm_req / shm_rsp are its port (in-order read data).
//
// The mesh of cores and the arbiter in front of a shared memory follow the
// published architecture; the mesh size (2 x 2 here; the published floorplan
// groups many cores per arbiter) and one arbiter for the whole mesh are this
// implementation's choices.
module seneca_top
  import seneca_pkg::*;
#(
  parameter int unsigned MESH_X    = 2,
  parameter int unsigned MESH_Y    = 2,
  parameter int unsigned N_NPE     = NPE_N,
  parameter int unsigned NREGS     = NPE_REGS,
  parameter int unsigned DM_WORDS  = DMEM_WORDS,
  parameter int unsigned IM_WORDS  = IMEM_WORDS,
  localparam int unsigned NC  = MESH_X * MESH_Y,
  localparam int unsigned IAW = $clog2(IM_WORDS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // one controller port per core
  input  logic           bus_we     [NC],
  input  logic           bus_re     [NC],
  input  logic [15:0]    bus_addr   [NC],
  input  logic [31:0]    bus_wdata  [NC],
  output logic [31:0]    bus_rdata  [NC],
  output logic           bus_rvalid [NC],
  input  logic           im_en      [NC],
  input  logic           im_we      [NC],
  input  logic [IAW-1:0] im_addr    [NC],
  input  logic [31:0]    im_wdata   [NC],
  output logic [31:0]    im_rdata   [NC],
  output logic           irq_evt    [NC],
  output logic           irq_noc    [NC],
  output logic           irq_done   [NC],
  output logic           irq_pf     [NC],
  // shared memory port
  output shm_req_t       shm_req,
  input  shm_rsp_t       shm_rsp,
  // activity, for observation
  output logic           obs_stall  [NC],
  output logic           obs_bypass [NC],
  output logic           obs_drop   [NC]
);

  // router port wiring: rin/rout[c][p]
  logic  r_in_valid  [NC][5];
  flit_t r_in_flit   [NC][5];
  logic  r_in_ready  [NC][5];
  logic  r_out_valid [NC][5];
  flit_t r_out_flit  [NC][5];
  logic  r_out_ready [NC][5];

  shm_req_t c_req [NC];
  shm_rsp_t c_rsp [NC];

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned C = y * MESH_X + x;

      seneca_core #(.N_NPE(N_NPE), .NREGS(NREGS), .DM_WORDS(DM_WORDS),
                    .IM_WORDS(IM_WORDS)) u_core (
        .clk, .rst_n,
        .bus_we(bus_we[C]), .bus_re(bus_re[C]), .bus_addr(bus_addr[C]),
        .bus_wdata(bus_wdata[C]), .bus_rdata(bus_rdata[C]), .bus_rvalid(bus_rvalid[C]),
        .im_en(im_en[C]), .im_we(im_we[C]), .im_addr(im_addr[C]),
        .im_wdata(im_wdata[C]), .im_rdata(im_rdata[C]),
        .irq_evt(irq_evt[C]), .irq_noc(irq_noc[C]), .irq_done(irq_done[C]), .irq_pf(irq_pf[C]),
        .noc_out_valid(r_in_valid[C][0]), .noc_out_flit(r_in_flit[C][0]),
        .noc_out_ready(r_in_ready[C][0]),
        .noc_in_valid (r_out_valid[C][0]), .noc_in_flit(r_out_flit[C][0]),
        .noc_in_ready (r_out_ready[C][0]),
        .shm_req(c_req[C]), .shm_rsp(c_rsp[C]),
        .obs_stall(obs_stall[C]), .obs_bypass(obs_bypass[C]), .obs_drop(obs_drop[C])
      );

      noc_router u_router (
        .clk, .rst_n,
        .my_x(4'(x)), .my_y(4'(y)),
        .in_valid (r_in_valid[C]),  .in_flit (r_in_flit[C]),  .in_ready (r_in_ready[C]),
        .out_valid(r_out_valid[C]), .out_flit(r_out_flit[C]), .out_ready(r_out_ready[C])
      );

      // north (1) <-> south (3) of the router above
      if (y > 0) begin : g_n
        assign r_in_valid[C][1]  = r_out_valid[C-MESH_X][3];
        assign r_in_flit[C][1]   = r_out_flit[C-MESH_X][3];
        assign r_out_ready[C-MESH_X][3] = r_in_ready[C][1];
      end else begin : g_n_edge
        assign r_in_valid[C][1]  = 1'b0;
        assign r_in_flit[C][1]   = '0;
      end
      if (y < MESH_Y - 1) begin : g_s
        assign r_in_valid[C][3]  = r_out_valid[C+MESH_X][1];
        assign r_in_flit[C][3]   = r_out_flit[C+MESH_X][1];
        assign r_out_ready[C+MESH_X][1] = r_in_ready[C][3];
      end else begin : g_s_edge
        assign r_in_valid[C][3]  = 1'b0;
        assign r_in_flit[C][3]   = '0;
        assign r_out_ready[C][3] = 1'b0;
      end
      if (y == 0) begin : g_n_edge_rdy
        assign r_out_ready[C][1] = 1'b0;
      end
      // west (4) <-> east (2) of the router to the left
      if (x > 0) begin : g_w
        assign r_in_valid[C][4]  = r_out_valid[C-1][2];
        assign r_in_flit[C][4]   = r_out_flit[C-1][2];
        assign r_out_ready[C-1][2] = r_in_ready[C][4];
      end else begin : g_w_edge
        assign r_in_valid[C][4]  = 1'b0;
        assign r_in_flit[C][4]   = '0;
        assign r_out_ready[C][4] = 1'b0;
      end
      if (x < MESH_X - 1) begin : g_e
        assign r_in_valid[C][2]  = r_out_valid[C+1][4];
        assign r_in_flit[C][2]   = r_out_flit[C+1][4];
        assign r_out_ready[C+1][4] = r_in_ready[C][2];
      end else begin : g_e_edge
        assign r_in_valid[C][2]  = 1'b0;
        assign r_in_flit[C][2]   = '0;
        assign r_out_ready[C][2] = 1'b0;
      end
    end
  end

  shmem_arbiter #(.N(NC)) u_arb (
    .clk, .rst_n, .s_req(c_req), .s_rsp(c_rsp), .m_req(shm_req), .m_rsp(shm_rsp)
  );

endmodule

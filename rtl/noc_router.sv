// noc_router -- five-port mesh router of the NoC.
//
// Ports: 0 local core, 1 north (y-1), 2 east (x+1), 3 south (y+1),
// 4 west (x-1). Every input has a FIFO of IN_DEPTH packets (in_ready = not
// full). Packets are routed dimension-order: first along x until dx matches
// the router's own x, then along y, then out of the local port. Each output
// serves the inputs that want it round-robin and moves at most one packet
// per cycle when its receiver is ready (out_valid / out_ready). A packet
// therefore crosses one router per cycle when nothing blocks it.
// The mesh of cores joined by a NoC carrying 32-bit events is the published
// structure; the router's insides (routing rule, buffering, arbitration) are
// not published and are this implementation's.
module noc_router
  import seneca_pkg::*;
#(
  parameter int unsigned IN_DEPTH = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [3:0] my_x,
  input  logic [3:0] my_y,
  input  logic       in_valid  [5],
  input  flit_t      in_flit   [5],
  output logic       in_ready  [5],
  output logic       out_valid [5],
  output flit_t      out_flit  [5],
  input  logic       out_ready [5]
);

  localparam int unsigned P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  flit_t      head   [5];
  logic       hempty [5];
  logic       hfull  [5];
  logic       pop    [5];
  logic [2:0] route  [5];
  logic [4:0] req    [5];   // req[o][i]: input i wants output o
  logic [4:0] gnt    [5];

  for (genvar i = 0; i < 5; i++) begin : g_in
    sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(IN_DEPTH)) u_q (
      .clk, .rst_n,
      .push(in_valid[i]), .wdata(in_flit[i]),
      .pop (pop[i]),
      .rdata(head[i]), .full(hfull[i]), .empty(hempty[i]), .count()
    );
    assign in_ready[i] = !hfull[i];

    always_comb begin
      if      (head[i].dx > my_x) route[i] = 3'(P_E);
      else if (head[i].dx < my_x) route[i] = 3'(P_W);
      else if (head[i].dy > my_y) route[i] = 3'(P_S);
      else if (head[i].dy < my_y) route[i] = 3'(P_N);
      else                        route[i] = 3'(P_L);
    end
  end

  for (genvar o = 0; o < 5; o++) begin : g_out
    always_comb begin
      for (int i = 0; i < 5; i++)
        req[o][i] = !hempty[i] && (route[i] == 3'(o));
    end

    rr_arbiter #(.N(5)) u_arb (
      .clk, .rst_n, .req(req[o]), .adv(out_ready[o]), .gnt(gnt[o])
    );

    always_comb begin
      out_valid[o] = (req[o] != '0);
      out_flit[o]  = '0;
      for (int i = 0; i < 5; i++)
        if (gnt[o][i]) out_flit[o] = head[i];
    end
  end

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      pop[i] = 1'b0;
      for (int o = 0; o < 5; o++)
        if (gnt[o][i] && out_ready[o]) pop[i] = 1'b1;
    end
  end

endmodule

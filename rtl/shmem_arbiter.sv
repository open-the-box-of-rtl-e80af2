// shmem_arbiter -- shares one shared-memory port among N cores.
//
// Each core's prefetch unit raises a request (shm_req_t) and holds it until
// granted. The arbiter passes one request per cycle to the memory port,
// choosing round-robin among the waiting cores; the memory's gnt is returned
// to that core only. The memory must return read data in the order it
// accepted reads: the arbiter remembers the core of every accepted read in a
// small queue and steers each rvalid/rdata back to it. At most OUTSTANDING
// reads may be in flight (further reads are held).
// The arbiter between a group of cores and a shared memory is shown in the
// published floorplan; its policy and protocol are this implementation's.
module shmem_arbiter
  import seneca_pkg::*;
#(
  parameter int unsigned N           = 4,
  parameter int unsigned OUTSTANDING = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  shm_req_t s_req [N],
  output shm_rsp_t s_rsp [N],
  output shm_req_t m_req,
  input  shm_rsp_t m_rsp
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0]  req_v, gnt;
  logic [IW-1:0] win, rid;
  logic          q_full, q_empty, accept;

  always_comb begin
    for (int i = 0; i < N; i++)
      req_v[i] = s_req[i].req && !(q_full && !s_req[i].we);
  end

  rr_arbiter #(.N(N)) u_arb (.clk, .rst_n, .req(req_v), .adv(m_rsp.gnt), .gnt);

  always_comb begin
    win = '0;
    for (int i = 0; i < N; i++)
      if (gnt[i]) win = IW'(i);
  end

  always_comb begin
    m_req     = s_req[win];
    m_req.req = (gnt != '0);
  end

  assign accept = m_req.req && m_rsp.gnt && !m_req.we;

  sync_fifo #(.WIDTH(IW), .DEPTH(OUTSTANDING)) u_ids (
    .clk, .rst_n,
    .push(accept), .wdata(win),
    .pop (m_rsp.rvalid), .rdata(rid),
    .full(q_full), .empty(q_empty), .count()
  );

  always_comb begin
    for (int i = 0; i < N; i++) begin
      s_rsp[i].gnt    = m_rsp.gnt && gnt[i];
      s_rsp[i].rvalid = m_rsp.rvalid && !q_empty && (rid == IW'(i));
      s_rsp[i].rdata  = m_rsp.rdata;
    end
  end

  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n) m_rsp.rvalid |-> !q_empty);

endmodule

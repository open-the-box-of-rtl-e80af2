// noc_ni -- the core's network interface to the NoC.
//
// Outgoing: the controller pushes AER events into the transmit FIFO
// (tx_push, tx_full). The oldest one is looked up in the routing table and
// offered to the local port of the mesh router as a packet (out_valid /
// out_ready). An event whose routing entry is invalid is dropped (dropped
// pulses). Incoming: packets from the router's local port go into the
// receive FIFO (in_ready = not full); the controller pops them (rx_pop) and
// rx_empty low is its interrupt. Both FIFOs hold DEPTH events.
// The FIFO and the routing table are shown in the published core; the
// handshakes, the drop rule and the depth are this implementation's.
module noc_ni
  import seneca_pkg::*;
#(
  parameter int unsigned DEPTH      = 16,
  parameter int unsigned RT_ENTRIES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // controller side
  input  logic        tx_push,
  input  aer_t        tx_data,
  output logic        tx_full,
  input  logic        rx_pop,
  output aer_t        rx_data,
  output logic        rx_empty,
  input  logic        rt_we,
  input  logic [$clog2(RT_ENTRIES)-1:0] rt_widx,
  input  logic [31:0] rt_wdata,
  output logic        dropped,
  // router local port
  output logic        out_valid,
  output flit_t       out_flit,
  input  logic        out_ready,
  input  logic        in_valid,
  input  flit_t       in_flit,
  output logic        in_ready
);

  aer_t  tx_head;
  logic  tx_empty, rx_full, hit;
  flit_t pkt;

  sync_fifo #(.WIDTH($bits(aer_t)), .DEPTH(DEPTH)) u_tx (
    .clk, .rst_n,
    .push (tx_push), .wdata(tx_data),
    .pop  (!tx_empty && (!hit || out_ready)),
    .rdata(tx_head), .full(tx_full), .empty(tx_empty), .count()
  );

  routing_table #(.ENTRIES(RT_ENTRIES)) u_rt (
    .clk, .rst_n,
    .we(rt_we), .widx(rt_widx), .wdata(rt_wdata),
    .ev(tx_head), .hit, .pkt
  );

  assign out_valid = !tx_empty && hit;
  assign out_flit  = pkt;
  assign dropped   = !tx_empty && !hit;

  sync_fifo #(.WIDTH($bits(aer_t)), .DEPTH(DEPTH)) u_rx (
    .clk, .rst_n,
    .push (in_valid), .wdata(in_flit.ev),
    .pop  (rx_pop),
    .rdata(rx_data), .full(rx_full), .empty(rx_empty), .count()
  );

  assign in_ready = !rx_full;

endmodule

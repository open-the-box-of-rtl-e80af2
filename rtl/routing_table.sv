// routing_table -- destination lookup for outgoing events.
//
// ENTRIES entries, written by the controller. An outgoing event is looked up
// by the top bits of its neuron address (index = addr >> LOCAL_BITS), so each
// entry covers a block of 2**LOCAL_BITS neurons of this core. An entry holds a
// valid bit, the destination core's mesh coordinates and a base address; the
// event leaves as a packet to (dx, dy) whose neuron address is
// base + (addr mod 2**LOCAL_BITS). The lookup is combinational. Entry format
// on wdata: [24] valid, [23:20] dx, [19:16] dy, [15:0] base.
// The published core names the routing table in its NoC interface but not
// its organisation; the block-wise unicast mapping is this implementation's.
module routing_table
  import seneca_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IW = $clog2(ENTRIES),
  localparam int unsigned LOCAL_BITS = 16 - IW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  logic [31:0]   wdata,
  input  aer_t          ev,
  output logic          hit,
  output flit_t         pkt
);

  typedef struct packed {
    logic        valid;
    logic [3:0]  dx;
    logic [3:0]  dy;
    logic [15:0] base;
  } rt_entry_t;

  rt_entry_t tab [ENTRIES];
  rt_entry_t e;

  assign e            = tab[ev.addr[15 -: IW]];
  assign hit          = e.valid;
  assign pkt.dx       = e.dx;
  assign pkt.dy       = e.dy;
  assign pkt.ev.addr  = e.base + 16'(ev.addr[LOCAL_BITS-1:0]);
  assign pkt.ev.value = ev.value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab[i] <= '0;
    end else if (we) begin
      tab[widx] <= wdata[24:0];
    end
  end

endmodule

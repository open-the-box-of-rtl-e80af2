// data_mem -- the core's local data memory (SRAM), two ports of different width.
//
// Port A is the controller's 32-bit port; port B is the wide NPE port,
// 16 bits per NPE, so that all NPEs load or store their own lane of one row
// in the same cycle. The array is ROWS rows of 16*N_NPE bits; 32-bit word w
// of port A is lanes 2k (bits 15:0) and 2k+1 (bits 31:16) of row w/(N_NPE/2),
// with k = w mod (N_NPE/2). Both ports are synchronous: read data appears the
// cycle after the request. When both ports write the same lane in one cycle,
// port B's value is kept. Reads return the old contents (read-before-write).
//
// The 8K x 32-bit size, the 32-bit port A and the 16 x n-bit port B follow
// the published core; the lane mapping and collision rule are this
// implementation's. It is written as an array; a real chip would use an SRAM
// macro with the same two ports.
module data_mem
  import seneca_pkg::*;
#(
  parameter int unsigned WORDS = DMEM_WORDS,
  parameter int unsigned N_NPE = NPE_N,
  localparam int unsigned ROWS = WORDS * 2 / N_NPE,
  localparam int unsigned AW_A = $clog2(WORDS),
  localparam int unsigned AW_B = $clog2(ROWS)
) (
  input  logic                  clk,
  // port A: 32-bit controller port
  input  logic                  a_en,
  input  logic                  a_we,
  input  logic [AW_A-1:0]       a_addr,
  input  logic [31:0]           a_wdata,
  output logic [31:0]           a_rdata,
  // port B: 16 x N_NPE-bit NPE port
  input  logic                  b_en,
  input  logic                  b_we,
  input  logic [AW_B-1:0]       b_addr,
  input  logic [16*N_NPE-1:0]   b_wdata,
  output logic [16*N_NPE-1:0]   b_rdata
);

  localparam int unsigned PAIRS = N_NPE / 2;
  localparam int unsigned PW    = (PAIRS > 1) ? $clog2(PAIRS) : 1;

  logic [16*N_NPE-1:0] mem [ROWS];
  logic [AW_B-1:0] a_row;
  logic [PW-1:0]   a_pair;

  if (PAIRS > 1) begin : g_split
    assign a_row  = a_addr[AW_A-1:PW];
    assign a_pair = a_addr[PW-1:0];
  end else begin : g_nosplit
    assign a_row  = a_addr;
    assign a_pair = '0;
  end

  always_ff @(posedge clk) begin
    if (a_en && !a_we) a_rdata <= mem[a_row][32*a_pair +: 32];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
    if (a_en && a_we)  mem[a_row][32*a_pair +: 32] <= a_wdata;
    if (b_en && b_we)  mem[b_addr] <= b_wdata;
  end

endmodule

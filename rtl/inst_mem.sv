// inst_mem -- instruction memory of the core's RISC-V controller.
//
// A single-port synchronous SRAM of WORDS x 32 bits: on a cycle with en set
// it either writes wdata (we = 1) or reads, the read word appearing on rdata
// the next cycle. The controller fetches its program from it; the program is
// loaded through the same port. The 8K x 32-bit size is the published one;
// the port protocol is this implementation's. Written as an array; a chip
// would use an SRAM macro.
module inst_mem
  import seneca_pkg::*;
#(
  parameter int unsigned WORDS = IMEM_WORDS,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata <= mem[addr];
    end
  end

endmodule

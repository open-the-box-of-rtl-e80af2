// shmem_model -- behavioural model of the external shared memory (the
// HBM/DRAM outside the chip), used by testbenches only.
//
// Accepts a request in a cycle when req is high and the model is not busy
// (gnt is combinational from req; with STALL_PCT > 0 some cycles refuse at
// random). Writes complete at once; read data returns, in request order,
// LAT cycles after the request is granted. WORDS words, addressed modulo
// WORDS. Not synthesizable: it models a device, not logic of the design.
module shmem_model
  import seneca_pkg::*;
#(
  parameter int unsigned WORDS     = 65536,
  parameter int unsigned LAT       = 4,
  parameter int unsigned STALL_PCT = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  shm_req_t req,
  output shm_rsp_t rsp
);
  logic [31:0] mem [WORDS];
  logic [31:0] pipe_d [LAT];
  logic        pipe_v [LAT];
  logic        refuse;
  int          grants = 0;

  initial for (int i = 0; i < WORDS; i++) mem[i] = 32'(i) ^ 32'hA5A5_0000;

  always_ff @(posedge clk) refuse <= ($urandom_range(99) < STALL_PCT);

  assign rsp.gnt    = req.req && !refuse;
  assign rsp.rvalid = pipe_v[LAT-1];
  assign rsp.rdata  = pipe_d[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
    end else begin
      pipe_v[0] <= rsp.gnt && !req.we;
      pipe_d[0] <= mem[req.addr % WORDS];
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (rsp.gnt && req.we) mem[req.addr % WORDS] <= req.wdata;
      if (rsp.gnt) grants <= grants + 1;
    end
  end
endmodule

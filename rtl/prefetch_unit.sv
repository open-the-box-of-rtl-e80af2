// prefetch_unit -- moves data between the shared memory and the data memory.
//
// When a model does not fit in the core's data memory, parts of it live in
// the large shared memory outside the core. The controller programs an
// external word address, a local word address, a length in 32-bit words and
// a direction, then starts the unit:
//   dir = 0  prefetch:   shared[ext + i] -> data memory[loc + i]
//   dir = 1  write-back: data memory[loc + i] -> shared[ext + i]
// Words are moved one at a time: a shared-memory request is held until it is
// granted (shm_rsp.gnt), read data comes back later with shm_rsp.rvalid. On
// the local side the unit uses data-memory port A in cycles where the
// controller leaves it free (lm_gnt); local read data arrives the cycle
// after a granted read. busy is high while moving; done pulses at the end.
// The published core shows a shared-memory prefetch unit between the data
// memory and the shared memory; its programming model and the one-word-at-a
// -time transfer are this implementation's.
module prefetch_unit
  import seneca_pkg::*;
#(
  parameter int unsigned LAW = 13   // local word-address width
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           dir,
  input  logic [31:0]    ext_addr,
  input  logic [LAW-1:0] loc_addr,
  input  logic [15:0]    len,
  output logic           busy,
  output logic           done,
  // data-memory port A (shared with the controller, which has priority)
  output logic           lm_req,
  output logic           lm_we,
  output logic [LAW-1:0] lm_addr,
  output logic [31:0]    lm_wdata,
  input  logic           lm_gnt,
  input  logic [31:0]    lm_rdata,
  // shared memory
  output shm_req_t       shm_req,
  input  shm_rsp_t       shm_rsp
);

  typedef enum logic [2:0] {S_IDLE, S_RREQ, S_RWAIT, S_LWR, S_LRD, S_LDAT, S_WREQ} st_e;
  st_e st;
  logic [15:0]    cnt, n;
  logic [31:0]    ebase;
  logic [LAW-1:0] lbase;
  logic [31:0]    buf_q;

  assign busy = (st != S_IDLE);

  always_comb begin
    lm_req   = (st == S_LWR) || (st == S_LRD);
    lm_we    = (st == S_LWR);
    lm_addr  = lbase + LAW'(cnt);
    lm_wdata = buf_q;
    shm_req.req   = (st == S_RREQ) || (st == S_WREQ);
    shm_req.we    = (st == S_WREQ);
    shm_req.addr  = ebase + 32'(cnt);
    shm_req.wdata = buf_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      cnt   <= '0;
      n     <= '0;
      ebase <= '0;
      lbase <= '0;
      buf_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          cnt   <= '0;
          n     <= len;
          ebase <= ext_addr;
          lbase <= loc_addr;
          if (len == '0) done <= 1'b1;
          else st <= dir ? S_LRD : S_RREQ;
        end
        S_RREQ:  if (shm_rsp.gnt) st <= S_RWAIT;
        S_RWAIT: if (shm_rsp.rvalid) begin
          buf_q <= shm_rsp.rdata;
          st    <= S_LWR;
        end
        S_LWR: if (lm_gnt) begin
          cnt <= cnt + 1'b1;
          if (cnt == n - 1'b1) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_RREQ;
        end
        S_LRD:  if (lm_gnt) st <= S_LDAT;
        S_LDAT: begin
          buf_q <= lm_rdata;
          st    <= S_WREQ;
        end
        S_WREQ: if (shm_rsp.gnt) begin
          cnt <= cnt + 1'b1;
          if (cnt == n - 1'b1) begin st <= S_IDLE; done <= 1'b1; end
          else st <= S_LRD;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule

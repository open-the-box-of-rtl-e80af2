// event_generator -- turns the NPEs' EVC results into address events.
//
// When an EVC instruction issues, every NPE offers one 16-bit value. A lane
// whose value is non-zero (bits 14:0 not all zero, so +0 and -0 make no
// event) becomes one event in address-event representation (AER): the
// neuron address base + iter * N_NPE + lane, where iter is the loop-buffer
// iteration, and the value itself. The captured lanes are sent one per cycle,
// lowest lane first, to the event FIFO towards the controller (ev_valid /
// ev_ready, ev_ready being the FIFO's not-full). ready is low while lanes of
// an earlier EVC are still waiting; the loop buffer then holds the next EVC,
// which is the only back-pressure on the NPE pipeline. evc_fire while not
// ready is a protocol error (checked by an assertion).
//
// Capturing events per NPE and converting them to AER follows the published
// core; the non-zero rule, the address formula and serialisation one event per
// cycle are this implementation's.
module event_generator
  import seneca_pkg::*;
#(
  parameter int unsigned N_NPE = NPE_N
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] base,
  input  logic        evc_fire,
  input  logic [15:0] evc_iter,
  input  logic [15:0] evc_value [N_NPE],
  output logic        ready,
  output logic        ev_valid,
  output aer_t        ev_data,
  input  logic        ev_ready
);

  localparam int unsigned LW = (N_NPE > 1) ? $clog2(N_NPE) : 1;

  logic [N_NPE-1:0] pend;
  logic [15:0]      val [N_NPE];
  logic [15:0]      row_base;
  logic [LW-1:0]    lane;

  assign ready = (pend == '0);

  always_comb begin
    lane = '0;
    for (int i = N_NPE - 1; i >= 0; i--)
      if (pend[i]) lane = LW'(i);
  end

  assign ev_valid      = (pend != '0);
  assign ev_data.addr  = row_base + 16'(lane);
  assign ev_data.value = val[lane];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= '0;
      row_base <= '0;
      for (int i = 0; i < N_NPE; i++) val[i] <= '0;
    end else if (evc_fire && ready) begin
      for (int i = 0; i < N_NPE; i++) begin
        pend[i] <= (evc_value[i][14:0] != 15'd0);
        val[i]  <= evc_value[i];
      end
      row_base <= base + 16'(evc_iter * N_NPE);
    end else if (ev_valid && ev_ready) begin
      pend[lane] <= 1'b0;
    end
  end

  a_no_fire_when_busy: assert property (@(posedge clk) disable iff (!rst_n) evc_fire |-> ready);

endmodule

// rr_arbiter -- round-robin arbiter (helper).
//
// Grants one of N requesters (one-hot gnt, combinational from req). The
// search starts one past the last requester whose grant was used (adv high),
// so every waiting requester is served within N grants.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         adv,   // the current grant is used this cycle
  output logic [N-1:0] gnt
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  always_comb begin
    int unsigned idx;
    gnt = '0;
    for (int k = N; k >= 1; k--) begin
      idx = (32'(last) + 32'(k)) % N;
      if (req[idx]) gnt = N'(1) << idx;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (adv && gnt != '0) begin
      for (int i = 0; i < N; i++)
        if (gnt[i]) last <= IW'(i);
    end
  end

endmodule

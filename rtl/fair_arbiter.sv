// fair_arbiter: grants one of N requesters per cycle.
//
// The paper describes the scheme for two requesters (the PPU and the external
// bus at the synapse array access unit): a flip-flop records which requester
// is favoured when both request, and the flip-flop is inverted on every
// conflict. This module generalises that flip-flop to a favoured index that
// advances by one on every conflict; with N = 2 it is exactly the paper's
// scheme. The paper calls the vector register file arbitration between the
// five reservation stations "pseudo-random fair" without further detail; this
// design uses the same module there with N = 5 (own choice).
//
// Timing: combinational grant from req and the favoured register; the
// register updates on the clock edge of a cycle with a conflict. Without a
// conflict the single requester wins and the state is kept.
module fair_arbiter #(
  parameter int unsigned N = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx,
  output logic                 conflict
);
  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] favoured;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(favoured) + k) % N;
      if (req[i] && gnt == '0) begin
        gnt[i]  = 1'b1;
        gnt_idx = IW'(i);
      end
    end
    conflict = (req & (req - 1'b1)) != '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      favoured <= '0;
    else if (conflict)
      favoured <= (favoured == IW'(N - 1)) ? '0 : favoured + 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_grant:  assert property (@(posedge clk) disable iff (!rst_n) (req != '0) |-> (gnt & req) != '0);
endmodule

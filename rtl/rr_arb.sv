// rr_arb: plain round-robin arbiter used where the design needs a fair choice
// among requesters (cell memory read ports, force cache input ports, the
// request holder of the scoreboard).  Combinational grant: gnt is one-hot among
// req, starting the search just above the last granted index; the pointer moves
// when `adv` is high and a grant was given.
module rr_arb #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         adv,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic         any
);
  localparam int IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] last;

  always_comb begin
    int j;
    gnt = '0;
    gnt_idx = '0;
    any = 1'b0;
    for (int i = 1; i <= N; i++) begin
      j = (int'(last) + i) % N;
      if (!any && req[j]) begin
        any = 1'b1;
        gnt[j] = 1'b1;
        gnt_idx = IW'(j);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (adv && any) last <= gnt_idx;
  end
endmodule

// sync_fifo: single-clock FIFO used for the filter buffers, the pipeline output
// queues and the force cache input buffers.  Show-ahead: rd_data is the head
// entry whenever empty is low.  A push when full (unless the head is popped in
// the same cycle) and a pop when empty are
// ignored (and flagged by the assertions).  `count` lets the producer throttle
// early (almost-full thresholds are set by the users).
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               wr_data,
  input  logic                       pop,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic          do_push, do_pop;

  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_push = push && (!full || pop);
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp <= '0;
      wp <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule

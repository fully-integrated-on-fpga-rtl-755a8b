// filter_bank: the LANES (8) filters of one force pipeline, each followed by its
// filter buffer, and the round-robin arbiter that hands at most one surviving
// pair per cycle to the force pipeline.
// Input: one reference particle and up to LANES neighbour particles per cycle
// (in_mask marks the real ones).  Lane i is tested by filter i; a passing pair
// is written into buffer i one cycle later.  Output: out_valid/out_pair, one
// pair per cycle when the arbiter grants (no back-pressure from the pipeline;
// `enable` low stops the arbiter when the queues behind the pipeline fill).
// almost_full tells the pair generator to stop issuing: it is raised while any
// buffer has fewer than 3 free entries, which covers the two pairs that may
// already be on their way (generator register and filter register).
// Buffer depth (16) and the almost-full margin are this design's choices.
module filter_bank
  import md_pkg::*;
#(
  parameter int   N     = LANES,
  parameter int   DEPTH = 16,
  parameter fix_t BOX   = BOX_FIX
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [N-1:0]      in_mask,
  input  particle_t         ref_p,
  input  pid_t              ref_id,
  input  particle_t [N-1:0] nbr_p,
  input  pid_t      [N-1:0] nbr_id,
  input  logic              enable,
  output logic              out_valid,
  output pair_t             out_pair,
  output logic              almost_full,
  output logic              empty      // all buffers empty, nothing in the filters
);
  localparam int CW = $clog2(DEPTH + 1);

  pair_t        cand_q [N];
  logic [N-1:0] pass, nonempty, grant;
  logic [N-1:0] af;
  pair_t        head   [N];
  logic         in_flight;

  for (genvar i = 0; i < N; i++) begin : g_lane
    logic          emp, ful;
    logic [CW-1:0] cnt;

    planar_filter #(.BOX(BOX)) u_filter (
      .clk, .rst_n,
      .in_valid (in_valid && in_mask[i]),
      .ref_pos  (ref_p.pos),
      .nbr_pos  (nbr_p[i].pos),
      .pass     (pass[i])
    );

    always_ff @(posedge clk) begin
      cand_q[i] <= '{ref_p: ref_p, ref_id: ref_id, nbr_p: nbr_p[i], nbr_id: nbr_id[i]};
    end

    sync_fifo #(.W($bits(pair_t)), .DEPTH(DEPTH)) u_buf (
      .clk, .rst_n,
      .push    (pass[i]),
      .wr_data (cand_q[i]),
      .pop     (grant[i]),
      .rd_data (head[i]),
      .empty   (emp),
      .full    (ful),
      .count   (cnt)
    );
    assign nonempty[i] = !emp;
    assign af[i] = (cnt >= CW'(DEPTH - 3));
  end

  filter_arbiter #(.N(N)) u_arb (
    .clk, .rst_n, .enable, .valid_mask(nonempty), .grant
  );

  always_comb begin
    out_pair = '0;
    for (int i = 0; i < N; i++) if (grant[i]) out_pair = head[i];
  end
  assign out_valid   = |grant;
  assign almost_full = |af;

  always_ff @(posedge clk) begin
    if (!rst_n) in_flight <= 1'b0;
    else        in_flight <= in_valid && (|in_mask);
  end
  assign empty = (nonempty == '0) && !in_flight;
endmodule

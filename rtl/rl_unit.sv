// rl_unit: one complete range-limited pipeline as drawn in the RL evaluation
// overview: particle-pair generator, bank of LANES filters with buffers and
// arbitration, force pipeline, reference accumulator on the pipeline output and
// force negation for the neighbour particle.
// Outputs leave through two queues that meet in one port to the force caches:
// the reference totals (one per reference particle) and the negated pair forces
// for the neighbours (one per pair); the reference queue has priority.  The port
// is valid/ready: out_cell/out_slot name the force cache entry.
// Flow control: the arbiter of the filter bank is held while either queue lacks
// room for everything that can still come out of the force pipeline, and the
// generator stops while a filter buffer is nearly full, so nothing is dropped.
// Queue depths (32 and 16) are this design's choices.
module rl_unit
  import md_pkg::*;
#(
  parameter int   NCX   = NCELL_X,
  parameter int   NCY   = NCELL_X,
  parameter int   NCZ   = NCELL_X,
  parameter int   NPIPE = 41,
  parameter int   PIPE  = 0,
  parameter int   N     = LANES,
  parameter fix_t BOX   = BOX_FIX,
  parameter logic [R2_W-1:0] RCSQ = RCSQ_FIX
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NCX*NCY*NCZ-1:0][SLOT_W:0] cell_count,
  // cell memory read port
  output logic                  rd_req,
  output logic [CELL_W-1:0]     rd_cell,
  output logic [SLOT_W-1:0]     rd_row,
  input  logic                  rd_gnt,
  input  particle_t [N-1:0]     rd_data,
  // table loading (broadcast to all pipelines)
  input  logic                  tab_we,
  input  logic [1:0]            tab_term,
  input  logic                  tab_coef,
  input  logic [TAB_AW-1:0]     tab_addr,
  input  fp32_t                 tab_data,
  input  logic                  pc_we,
  input  logic [2*TYPE_W-1:0]   pc_addr,
  input  vec3f_t                pc_data,
  // to the force caches
  output logic                  out_valid,
  output logic [CELL_W-1:0]     out_cell,
  output logic [SLOT_W-1:0]     out_slot,
  output vec3f_t                out_f,
  input  logic                  out_ready,
  // status
  output logic                  cell_done,
  output logic [CELL_W-1:0]     done_cell,
  output logic                  all_done,
  output logic                  stalled       // generator held back this cycle
);
  localparam int NQ = 32;
  localparam int RQ = 16;
  typedef struct packed {
    pid_t   id;
    vec3f_t f;
  } qent_t;

  logic              g_valid, fb_af, fb_empty, flush, drain_idle, stall;
  logic [N-1:0]      g_mask;
  particle_t         g_ref;
  pid_t              g_ref_id;
  particle_t [N-1:0] g_nbr;
  pid_t      [N-1:0] g_nbr_id;
  logic              p_valid, fp_valid, fp_busy, enable;
  pair_t             p_pair;
  pid_t              f_rid, f_nid;
  vec3f_t            f_f;
  logic              ra_valid, ra_busy;
  pid_t              ra_pid;
  vec3f_t            ra_f;
  qent_t             nq_head, rq_head;
  logic              nq_empty, nq_full, rq_empty, rq_full, nq_pop, rq_pop;
  logic [$clog2(NQ+1)-1:0] nq_cnt;
  logic [$clog2(RQ+1)-1:0] rq_cnt;

  assign stall = fb_af;
  assign stalled = stall && rd_req;

  pair_generator #(.NCX(NCX), .NCY(NCY), .NCZ(NCZ), .NPIPE(NPIPE), .PIPE(PIPE), .N(N)) u_gen (
    .clk, .rst_n, .start, .cell_count,
    .rd_req, .rd_cell, .rd_row, .rd_gnt, .rd_data,
    .stall,
    .out_valid(g_valid), .out_mask(g_mask), .ref_p(g_ref), .ref_id(g_ref_id),
    .nbr_p(g_nbr), .nbr_id(g_nbr_id),
    .flush, .drain_idle, .cell_done, .done_cell, .all_done
  );

  // room for every pair that can still leave the force pipeline (9 cycles) plus margin
  assign enable = (nq_cnt < ($clog2(NQ+1))'(NQ - 12)) && (rq_cnt < ($clog2(RQ+1))'(RQ - 12));

  filter_bank #(.N(N), .BOX(BOX)) u_fb (
    .clk, .rst_n,
    .in_valid(g_valid), .in_mask(g_mask), .ref_p(g_ref), .ref_id(g_ref_id),
    .nbr_p(g_nbr), .nbr_id(g_nbr_id),
    .enable, .out_valid(p_valid), .out_pair(p_pair),
    .almost_full(fb_af), .empty(fb_empty)
  );

  rl_force_pipeline #(.BOX(BOX), .RCSQ(RCSQ)) u_fp (
    .clk, .rst_n, .in_valid(p_valid), .in_pair(p_pair),
    .tab_we, .tab_term, .tab_coef, .tab_addr, .tab_data,
    .pc_we, .pc_addr, .pc_data,
    .out_valid(fp_valid), .out_ref_id(f_rid), .out_nbr_id(f_nid), .out_f(f_f),
    .busy(fp_busy)
  );

  ref_accumulator u_racc (
    .clk, .rst_n, .in_valid(fp_valid), .in_pid(f_rid), .in_f(f_f), .flush,
    .out_valid(ra_valid), .out_pid(ra_pid), .out_f(ra_f), .busy(ra_busy)
  );

  // force negation for the neighbour particle (N3L)
  sync_fifo #(.W($bits(qent_t)), .DEPTH(NQ)) u_nq (
    .clk, .rst_n, .push(fp_valid),
    .wr_data(qent_t'{id: f_nid, f: '{fp_neg(f_f.x), fp_neg(f_f.y), fp_neg(f_f.z)}}),
    .pop(nq_pop), .rd_data(nq_head), .empty(nq_empty), .full(nq_full), .count(nq_cnt)
  );

  sync_fifo #(.W($bits(qent_t)), .DEPTH(RQ)) u_rq (
    .clk, .rst_n, .push(ra_valid), .wr_data(qent_t'{id: ra_pid, f: ra_f}),
    .pop(rq_pop), .rd_data(rq_head), .empty(rq_empty), .full(rq_full), .count(rq_cnt)
  );

  always_comb begin
    out_valid = !rq_empty || !nq_empty;
    out_cell  = !rq_empty ? rq_head.id.cidx : nq_head.id.cidx;
    out_slot  = !rq_empty ? rq_head.id.slot : nq_head.id.slot;
    out_f     = !rq_empty ? rq_head.f : nq_head.f;
    rq_pop    = out_ready && !rq_empty;
    nq_pop    = out_ready && rq_empty && !nq_empty;
  end

  assign drain_idle = fb_empty && !fp_busy && !ra_busy && rq_empty && nq_empty && !ra_valid;
endmodule

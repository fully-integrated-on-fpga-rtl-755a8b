// rl_force_cache: the RL force memory of one cell (CAP slots of Fx,Fy,Fz in fp32)
// with its neighbour accumulator.
// Writers: NSRC force pipelines offer (slot, partial force); a round-robin pick
// admits one per cycle into the input buffer (src_ready is the grant).  Each cycle
// the head of the input buffer is compared with PID1..PID3, the slots whose sums
// are inside the 3-cycle FP adder.  No match: the stored force is read, added to
// the partial force, and written back when the adder returns.  Match: the entry
// is written back to the bottom of the input buffer, as the paper's neighbour
// accumulator does, and a new entry is tried the next cycle.  This removes the
// read-after-write hazard without stalling the pipelines.
// Reader: summation reads a slot with rd_en/rd_slot (combinational rd_f) and the
// slot is cleared in the same cycle, ready for the next iteration.  Reads are only
// legal while `idle` (nothing buffered or in the adder), which the assertion checks.
// Buffer depth (16) is this design's choice.
module rl_force_cache
  import md_pkg::*;
#(
  parameter int NSRC  = 4,
  parameter int CAP   = CELL_CAP,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NSRC-1:0]        src_valid,
  input  logic [NSRC-1:0][SLOT_W-1:0] src_slot,
  input  vec3f_t [NSRC-1:0]      src_f,
  output logic [NSRC-1:0]        src_ready,
  input  logic                   rd_en,
  input  logic [SLOT_W-1:0]      rd_slot,
  output vec3f_t                 rd_f,
  output logic                   idle,
  output logic                   requeue      // a hazard re-queue happened this cycle
);
  typedef struct packed {
    logic [SLOT_W-1:0] slot;
    vec3f_t            f;
  } entry_t;

  vec3f_t mem [CAP];
  logic [CAP-1:0] mem_v;

  entry_t head, push_d;
  logic   empty, full, push, pop;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic [NSRC-1:0] gnt;
  logic [$clog2(NSRC > 1 ? NSRC : 2)-1:0] gidx;
  logic   any, hazard, issue;

  // adder state
  logic [2:0] a_ov;
  logic [2:0][SLOT_W-1:0] a_otag;
  logic [2:0][2:0] a_sv;
  logic [2:0][2:0][SLOT_W-1:0] a_st;
  fp32_t a_y [3];
  fp32_t a_a [3];
  fp32_t a_b [3];

  rr_arb #(.N(NSRC)) u_src_arb (
    .clk, .rst_n, .req(src_valid), .adv(any && !requeue && (!full || pop)),
    .gnt, .gnt_idx(gidx), .any
  );

  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < 3; i++)
      if (a_sv[0][i] && a_st[0][i] == head.slot) hazard = 1'b1;
  end

  assign pop     = !empty;
  assign requeue = !empty && hazard;
  assign issue   = !empty && !hazard;
  assign push    = requeue || (any && (!full || pop));
  assign push_d  = requeue ? head : entry_t'{slot: src_slot[gidx], f: src_f[gidx]};
  assign src_ready = (requeue || (full && !pop)) ? '0 : gnt;

  sync_fifo #(.W($bits(entry_t)), .DEPTH(DEPTH)) u_inbuf (
    .clk, .rst_n, .push, .wr_data(push_d), .pop,
    .rd_data(head), .empty, .full, .count(cnt)
  );

  always_comb begin
    vec3f_t cur;
    cur = mem_v[head.slot] ? mem[head.slot] : '0;
    a_a[0] = head.f.x; a_a[1] = head.f.y; a_a[2] = head.f.z;
    a_b[0] = cur.x;    a_b[1] = cur.y;    a_b[2] = cur.z;
  end

  for (genvar k = 0; k < 3; k++) begin : g_add
    fp_add_pipe #(.LAT(3), .TAG_W(SLOT_W)) u_add (
      .clk, .rst_n, .in_valid(issue), .in_tag(head.slot),
      .a(a_a[k]), .b(a_b[k]),
      .out_valid(a_ov[k]), .out_tag(a_otag[k]), .y(a_y[k]),
      .stage_valid(a_sv[k]), .stage_tag(a_st[k])
    );
  end

  // the force words are a plain memory; a valid bit per slot marks a slot that
  // holds a sum (cleared by reset and by read-and-clear)
  always_ff @(posedge clk) begin
    if (a_ov[0]) mem[a_otag[0]] <= '{a_y[0], a_y[1], a_y[2]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_v <= '0;
    end else begin
      if (a_ov[0]) mem_v[a_otag[0]] <= 1'b1;
      if (rd_en)   mem_v[rd_slot] <= 1'b0;
    end
  end

  assign rd_f = mem_v[rd_slot] ? mem[rd_slot] : '0;
  assign idle = empty && (a_sv[0] == '0);

  a_read_idle: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> idle);
endmodule

// md_top: the complete MD engine of one FPGA, Design 6 (distributed per-cell
// memories + each pipeline on its own homecells).
//
// What it does.  One time step, started by step_start, runs three force parts
// at once and then integrates the motion cell by cell:
//  * range-limited (RL): NPIPE rl_unit pipelines, pipeline p owning homecells
//    p, p+NPIPE, ...  They read particle rows from the per-cell position caches
//    (one read port per cell, round-robin among the pipelines that ask for it)
//    and send neighbour-particle forces to the per-cell RL force caches
//    (one rl_force_cache per cell, fed by any pipeline through a per-cell
//    round-robin).  Each pipeline reports every finished homecell to the
//    scoreboard.
//  * long-range (LR): the particles of all cells are read from the position
//    caches' copy port, one per 4 cycles, and mapped onto the charge grid by
//    grid_mapping.  The FFT, inverse FFT and force interpolation are not built
//    here: the grid memory's access port is a port of the top (fft_*), and the
//    LR forces are written into the LR force cache through lrf_* by whatever
//    computes them.
//  * bonded: bonded_unit walks its bond list against its own position copy.
//  The scoreboard releases a cell to the summation once the cell and its
//  26 periodic neighbours are finished.  Summation waits for that cell's RL
//  force cache to be idle and for the bonded unit to be done, adds
//  RL + LR + bonded forces per particle, and motion update writes the new
//  particle into the inactive buffer of the cell it now belongs to (migration).
//  When every cell is summed, all caches swap buffers and step_done pulses.
//
// Loading.  Before the first step the host fills the position caches (ld_*),
// the force tables and pair parameters (tab_*, pc_*, the same for all
// pipelines), inverse masses (im_*), bond list and bonded positions (pl_*,
// pm_*), charges per type and basis coefficients (q_*, bc_*), and the LR
// forces (lrf_*).
//
// Counters: cnt_stall (cycles x pipelines a generator was held back by full
// buffers), cnt_requeue (force-cache hazard re-queues), cnt_migrate (particles
// that changed cell), cnt_overflow (a cell buffer was full), cnt_rdconf (a
// pipeline had to wait for a cell's read port).
//
// Lint notes: the cells' wr_full flags, the pipelines' all_done and the gid
// bits of the LR scan are not needed here and stay unconnected or unread
// (overflow is counted instead; the step ends on the summation count).
//
// Paper vs. this design: the block structure (per-cell caches, filters, force
// pipelines, accumulators, force caches, scoreboard, summation, motion update,
// LR grid mapping, bonded unit) follows the paper.  The read and write
// interconnect (per-cell round-robin), the step controller, the LR particle
// scan, and the host load ports are this design's own.  One grid-mapping unit
// is instantiated, where the paper's Design 6 uses two.
module md_top
  import md_pkg::*;
#(
  parameter int   NCX   = NCELL_X,
  parameter int   NCY   = NCELL_X,
  parameter int   NCZ   = NCELL_X,
  parameter int   NPIPE = 41,
  parameter int   CAP   = CELL_CAP,
  parameter int   N     = LANES,
  parameter int   G     = 64,
  parameter int   NPART = 23588,
  parameter int   NBOND = 32768,
  parameter fix_t BOX   = BOX_FIX,
  parameter logic [R2_W-1:0] RCSQ = RCSQ_FIX
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // step control
  input  logic                  step_start,
  input  fp32_t                 dt,
  output logic                  step_done,
  output logic                  busy,
  // position/velocity cache load (active buffer)
  input  logic                  ld_en,
  input  logic [CELL_W-1:0]     ld_cell,
  input  logic [SLOT_W-1:0]     ld_slot,
  input  particle_t             ld_p,
  input  vec3f_t                ld_v,
  input  logic                  ld_count_en,
  input  logic [SLOT_W:0]       ld_count,
  // RL force table and pair parameters (broadcast to all pipelines)
  input  logic                  tab_we,
  input  logic [1:0]            tab_term,
  input  logic                  tab_coef,
  input  logic [TAB_AW-1:0]     tab_addr,
  input  fp32_t                 tab_data,
  input  logic                  pc_we,
  input  logic [2*TYPE_W-1:0]   pc_addr,
  input  vec3f_t                pc_data,
  // inverse masses
  input  logic                  im_we,
  input  logic [TYPE_W-1:0]     im_addr,
  input  fp32_t                 im_data,
  // bonded: bond list, position copy
  input  logic                  pl_we,
  input  logic [$clog2(NBOND)-1:0] pl_addr,
  input  bond_t                 pl_data,
  input  logic [$clog2(NBOND+1)-1:0] npairs,
  input  logic                  pm_we,
  input  logic [GID_W-1:0]      pm_gid,
  input  pos_t                  pm_pos,
  // LR: charges, basis coefficients, grid clear
  input  logic                  q_we,
  input  logic [TYPE_W-1:0]     q_addr,
  input  fp32_t                 q_data,
  input  logic                  bc_we,
  input  logic [1:0]            bc_fn,
  input  logic [1:0]            bc_pow,
  input  fp32_t                 bc_data,
  input  logic                  grid_clear,
  output logic                  grid_clearing,
  output logic                  lr_map_done,
  // grid access port for the FFT cores (not built here)
  input  logic [15:0][$clog2(G*G*G/16)-1:0] fft_addr,
  output fp32_t [15:0]          fft_rd_re,
  output fp32_t [15:0]          fft_rd_im,
  input  logic [15:0]           fft_we,
  input  fp32_t [15:0]          fft_wr_re,
  input  fp32_t [15:0]          fft_wr_im,
  // LR force cache load (output of the LR force calculation, by gid)
  input  logic                  lrf_we,
  input  logic [GID_W-1:0]      lrf_gid,
  input  vec3f_t                lrf_f,
  // motion update output (observation)
  output logic                  mu_valid,
  output particle_t             mu_p,
  output vec3f_t                mu_v,
  output logic [CELL_W-1:0]     mu_cell,
  output logic                  mu_migrated,
  // event counters
  output logic [31:0]           cnt_stall,
  output logic [31:0]           cnt_requeue,
  output logic [31:0]           cnt_migrate,
  output logic [31:0]           cnt_overflow,
  output logic [31:0]           cnt_rdconf
);
  localparam int NCELL = NCX * NCY * NCZ;
  localparam int PW    = $clog2(NPIPE > 1 ? NPIPE : 2);
  localparam int CW    = $clog2(NCELL > 1 ? NCELL : 2);

  // ---------------- step controller ----------------
  typedef enum logic [1:0] {T_IDLE, T_RUN, T_DRAIN} tstate_t;
  tstate_t tst;
  logic    go;                       // one-cycle start of all units
  logic [CELL_W:0] cells_summed;
  logic [3:0]      drain_cnt;
  logic            swap;
  logic            sum_cell_done;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tst <= T_IDLE;
      cells_summed <= '0;
      drain_cnt <= '0;
    end else begin
      case (tst)
        T_IDLE: if (step_start) begin
          tst <= T_RUN;
          cells_summed <= '0;
        end
        T_RUN: begin
          if (sum_cell_done) cells_summed <= cells_summed + 1'b1;
          if (sum_cell_done && cells_summed == (CELL_W+1)'(NCELL - 1)) begin
            tst <= T_DRAIN;
            drain_cnt <= 4'd8;
          end
        end
        T_DRAIN: begin
          drain_cnt <= drain_cnt - 1'b1;
          if (drain_cnt == 4'd1) tst <= T_IDLE;
        end
        default: tst <= T_IDLE;
      endcase
    end
  end
  assign go        = (tst == T_IDLE) && step_start;
  assign swap      = (tst == T_DRAIN) && (drain_cnt == 4'd1);
  assign step_done = swap;
  assign busy      = (tst != T_IDLE);

  // ---------------- per-cell position caches ----------------
  logic [NCELL-1:0][SLOT_W:0]   cnt;
  particle_t [NCELL-1:0][N-1:0] pc_rd;
  particle_t [NCELL-1:0][N-1:0] pc_cp;
  particle_t [NCELL-1:0]        pc_mu_p;
  vec3f_t    [NCELL-1:0]        pc_mu_v;
  logic      [NCELL-1:0]        pc_wr_full, pc_ovf;
  logic      [NCELL-1:0]        c_rd_en;
  logic      [NCELL-1:0][SLOT_W-1:0] c_rd_row;
  logic      [NCELL-1:0][NPIPE-1:0]  c_gnt;

  // pipeline side of the read network
  logic      [NPIPE-1:0]              p_rd_req, p_rd_gnt;
  logic      [NPIPE-1:0][CELL_W-1:0]  p_rd_cell, p_rd_cell_q;
  logic      [NPIPE-1:0][SLOT_W-1:0]  p_rd_row;
  particle_t [NPIPE-1:0][N-1:0]       p_rd_data;

  // summation / LR scan selections
  logic [CELL_W-1:0] s_cell;
  logic [SLOT_W-1:0] s_slot;
  logic              s_rd_en;
  logic [SLOT_W-1:0] lr_row;

  // motion update write-back
  logic              m_valid, m_mig;
  particle_t         m_p;
  vec3f_t            m_v;
  logic [CELL_W-1:0] m_cell;

  for (genvar c = 0; c < NCELL; c++) begin : g_cell
    logic [PW-1:0] gi;
    logic          gany;
    logic [NPIPE-1:0] req;
    always_comb
      for (int p = 0; p < NPIPE; p++)
        req[p] = p_rd_req[p] && (p_rd_cell[p] == CELL_W'(c));

    rr_arb #(.N(NPIPE)) u_rarb (
      .clk, .rst_n, .req, .adv(gany), .gnt(c_gnt[c]), .gnt_idx(gi), .any(gany)
    );
    assign c_rd_en[c]  = gany;
    assign c_rd_row[c] = p_rd_row[gi];

    particle_cache #(.CAP(CAP), .N(N)) u_pc (
      .clk, .rst_n, .swap, .count(cnt[c]),
      .rd_en(c_rd_en[c]), .rd_row(c_rd_row[c]), .rd_data(pc_rd[c]),
      .mu_slot(s_slot), .mu_p(pc_mu_p[c]), .mu_v(pc_mu_v[c]),
      .cp_row(lr_row), .cp_data(pc_cp[c]),
      .wr_en(m_valid && m_cell == CELL_W'(c)), .wr_p(m_p), .wr_v(m_v),
      .wr_full(pc_wr_full[c]), .overflow(pc_ovf[c]),
      .ld_en(ld_en && ld_cell == CELL_W'(c)), .ld_slot, .ld_p, .ld_v,
      .ld_count_en(ld_count_en && ld_cell == CELL_W'(c)), .ld_count
    );
  end

  always_comb begin
    for (int p = 0; p < NPIPE; p++) begin
      p_rd_gnt[p] = 1'b0;
      for (int c = 0; c < NCELL; c++) p_rd_gnt[p] = p_rd_gnt[p] | c_gnt[c][p];
    end
  end

  always_ff @(posedge clk) p_rd_cell_q <= p_rd_cell;
  for (genvar p = 0; p < NPIPE; p++) begin : g_rdmux
    assign p_rd_data[p] = pc_rd[CW'(p_rd_cell_q[p])];
  end

  // ---------------- RL pipelines ----------------
  logic      [NPIPE-1:0]              rl_ov, rl_or, rl_cd, rl_ad, rl_st;
  logic      [NPIPE-1:0][CELL_W-1:0]  rl_oc, rl_dc;
  logic      [NPIPE-1:0][SLOT_W-1:0]  rl_os;
  vec3f_t    [NPIPE-1:0]              rl_of;
  logic      [NCELL-1:0][NPIPE-1:0]   fc_ready;

  for (genvar p = 0; p < NPIPE; p++) begin : g_pipe
    rl_unit #(
      .NCX(NCX), .NCY(NCY), .NCZ(NCZ), .NPIPE(NPIPE), .PIPE(p), .N(N),
      .BOX(BOX), .RCSQ(RCSQ)
    ) u_rl (
      .clk, .rst_n, .start(go), .cell_count(cnt),
      .rd_req(p_rd_req[p]), .rd_cell(p_rd_cell[p]), .rd_row(p_rd_row[p]),
      .rd_gnt(p_rd_gnt[p]), .rd_data(p_rd_data[p]),
      .tab_we, .tab_term, .tab_coef, .tab_addr, .tab_data,
      .pc_we, .pc_addr, .pc_data,
      .out_valid(rl_ov[p]), .out_cell(rl_oc[p]), .out_slot(rl_os[p]),
      .out_f(rl_of[p]), .out_ready(rl_or[p]),
      .cell_done(rl_cd[p]), .done_cell(rl_dc[p]), .all_done(rl_ad[p]),
      .stalled(rl_st[p])
    );
    assign rl_or[p] = fc_ready[CW'(rl_oc[p])][p];
  end

  // ---------------- per-cell RL force caches ----------------
  logic [NCELL-1:0] fc_idle, fc_rq;
  vec3f_t [NCELL-1:0] fc_rd;
  for (genvar c = 0; c < NCELL; c++) begin : g_fc
    logic [NPIPE-1:0] sv;
    always_comb
      for (int p = 0; p < NPIPE; p++)
        sv[p] = rl_ov[p] && (rl_oc[p] == CELL_W'(c));
    rl_force_cache #(.NSRC(NPIPE), .CAP(CAP)) u_fc (
      .clk, .rst_n, .src_valid(sv), .src_slot(rl_os), .src_f(rl_of),
      .src_ready(fc_ready[c]),
      .rd_en(s_rd_en && s_cell == CELL_W'(c)), .rd_slot(s_slot), .rd_f(fc_rd[c]),
      .idle(fc_idle[c]), .requeue(fc_rq[c])
    );
  end

  // ---------------- scoreboard ----------------
  logic              sb_valid, sb_ready;
  logic [CELL_W-1:0] sb_cell;
  scoreboard #(.NCX(NCX), .NCY(NCY), .NCZ(NCZ), .NDONE(NPIPE)) u_sb (
    .clk, .rst_n, .start(go), .done_v(rl_cd), .done_cell(rl_dc),
    .req_valid(sb_valid), .req_cell(sb_cell), .req_ready(sb_ready)
  );

  // ---------------- bonded ----------------
  logic   bd_done, bd_done_q;
  vec3f_t bd_f;
  logic [GID_W-1:0] s_gid;
  bonded_unit #(.NPART(NPART), .NBOND(NBOND), .BOX(BOX)) u_bd (
    .clk, .rst_n, .start(go), .npairs, .done(bd_done),
    .pl_we, .pl_addr, .pl_data,
    .pm_we(pm_we || m_valid), .pm_gid(m_valid ? m_p.gid : pm_gid),
    .pm_pos(m_valid ? m_p.pos : pm_pos),
    .rd_en(s_rd_en), .rd_gid(s_gid), .rd_f(bd_f)
  );
  always_ff @(posedge clk) begin
    if (!rst_n || go) bd_done_q <= 1'b0;
    else if (bd_done) bd_done_q <= 1'b1;
  end

  // ---------------- LR force cache ----------------
  vec3f_t lr_mem [NPART];
  always_ff @(posedge clk) if (lrf_we) lr_mem[lrf_gid] <= lrf_f;

  // ---------------- summation + motion update ----------------
  logic              s_ov;
  particle_t         s_op;
  vec3f_t            s_ovel, s_of;
  logic [CELL_W-1:0] s_oc;
  summation u_sum (
    .clk, .rst_n,
    .req_valid(sb_valid && tst == T_RUN), .req_cell(sb_cell), .req_ready(sb_ready),
    .rd_cell(s_cell), .rd_slot(s_slot), .rd_en(s_rd_en),
    .cell_count(cnt[CW'(s_cell)]),
    .cache_idle(fc_idle[CW'(s_cell)] && bd_done_q),
    .p_in(pc_mu_p[CW'(s_cell)]), .v_in(pc_mu_v[CW'(s_cell)]),
    .rl_f(fc_rd[CW'(s_cell)]), .gid(s_gid),
    .lr_f(lr_mem[s_gid]), .bf_f(bd_f),
    .out_valid(s_ov), .out_p(s_op), .out_v(s_ovel), .out_f(s_of), .out_cell(s_oc),
    .cell_done(sum_cell_done)
  );

  motion_update #(.NCX(NCX), .NCY(NCY), .NCZ(NCZ), .BOX(BOX)) u_mu (
    .clk, .rst_n, .dt, .im_we, .im_addr, .im_data,
    .in_valid(s_ov), .in_p(s_op), .in_v(s_ovel), .in_f(s_of), .in_cell(s_oc),
    .out_valid(m_valid), .out_p(m_p), .out_v(m_v), .out_cell(m_cell),
    .out_migrated(m_mig)
  );
  assign mu_valid    = m_valid;
  assign mu_p        = m_p;
  assign mu_v        = m_v;
  assign mu_cell     = m_cell;
  assign mu_migrated = m_mig;

  // ---------------- LR: particle scan, grid mapping, grid memory ----------------
  fp32_t qtab [1 << TYPE_W];
  always_ff @(posedge clk) if (q_we) qtab[q_addr] <= q_data;

  logic              lr_run, gm_ready, gm_busy, gm_valid;
  logic [CELL_W-1:0] lr_cell;
  logic [SLOT_W:0]   lr_j;
  particle_t         lr_part;
  assign lr_row   = SLOT_W'(lr_j / N);
  assign lr_part  = pc_cp[CW'(lr_cell)][lr_j % (SLOT_W+1)'(N)];
  assign gm_valid = lr_run && (lr_j < cnt[CW'(lr_cell)]);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lr_run <= 1'b0;
      lr_cell <= '0;
      lr_j <= '0;
      lr_map_done <= 1'b0;
    end else if (go) begin
      lr_run <= 1'b1;
      lr_cell <= '0;
      lr_j <= '0;
      lr_map_done <= 1'b0;
    end else if (lr_run) begin
      if (lr_j >= cnt[CW'(lr_cell)]) begin
        lr_j <= '0;
        if (lr_cell == CELL_W'(NCELL - 1)) lr_run <= 1'b0;
        else lr_cell <= lr_cell + 1'b1;
      end else if (gm_ready) begin
        lr_j <= lr_j + 1'b1;
      end
    end else if (!gm_busy && tst != T_IDLE) begin
      lr_map_done <= 1'b1;
    end
  end

  logic [15:0]                         g_en;
  logic [15:0][$clog2(G*G*G/16)-1:0]   g_addr;
  fp32_t [15:0]                        g_val;
  grid_mapping #(.G(G), .BOX(BOX)) u_gm (
    .clk, .rst_n, .in_valid(gm_valid), .in_ready(gm_ready),
    .in_pos(lr_part.pos), .in_q(qtab[lr_part.ptype]),
    .bc_we, .bc_fn, .bc_pow, .bc_data,
    .acc_en(g_en), .acc_addr(g_addr), .acc_val(g_val), .busy(gm_busy)
  );

  grid_memory #(.G(G)) u_grid (
    .clk, .rst_n, .clear(grid_clear), .clearing(grid_clearing),
    .acc_en(g_en), .acc_addr(g_addr), .acc_val(g_val),
    .ax_addr(fft_addr), .ax_rd_re(fft_rd_re), .ax_rd_im(fft_rd_im),
    .ax_we(fft_we), .ax_wr_re(fft_wr_re), .ax_wr_im(fft_wr_im)
  );

  // ---------------- counters ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt_stall <= '0;
      cnt_requeue <= '0;
      cnt_migrate <= '0;
      cnt_overflow <= '0;
      cnt_rdconf <= '0;
    end else begin
      cnt_stall    <= cnt_stall + 32'($countones(rl_st));
      cnt_requeue  <= cnt_requeue + 32'($countones(fc_rq));
      cnt_migrate  <= cnt_migrate + 32'(m_valid && m_mig);
      cnt_overflow <= cnt_overflow + 32'($countones(pc_ovf));
      cnt_rdconf   <= cnt_rdconf + 32'($countones(p_rd_req & ~p_rd_gnt));
    end
  end

  a_pm_conflict: assert property (@(posedge clk) disable iff (!rst_n) !(pm_we && m_valid));
endmodule

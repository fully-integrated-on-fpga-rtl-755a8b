// tb_md_top: end-to-end run of the engine on a small system: 3x3x3 cells in a
// 28.5 A box, 4 RL pipelines, a 16^3 grid, about 28 particles per cell with fast
// random velocities, a few bonds, LR forces written per particle.  Two time
// steps are run.  Step 1: every particle must come out of motion update once,
// with the velocity v + (F_RL + F_LR + F_bonded)/m dt of a real-arithmetic
// model (RL from the same interpolation tables over all half-shell pairs within
// the cutoff); the charge on the grid must equal the total charge.  Step 2
// (after migrations) must again update every particle exactly once.  Each
// mechanism must have happened at least once: generator stall, force-cache
// re-queue, cell-read conflict, migration, grid mapping; no cell may overflow.
module tb_md_top;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int NC = 3, NCELL = 27, NPIPE = 4, G = 16, NPART = 1024, NBOND = 64, NB = 40;
  localparam int AW = $clog2(G * G * G / 16);
  localparam fix_t BOX = fix_t'(28.5 * 1048576.0);

  logic clk = 0, rst_n = 0;
  logic step_start = 0, step_done, busy;
  fp32_t dt;
  logic ld_en = 0, ld_count_en = 0;
  logic [CELL_W-1:0] ld_cell = '0;
  logic [SLOT_W-1:0] ld_slot = '0;
  particle_t ld_p = '0;
  vec3f_t ld_v = '0;
  logic [SLOT_W:0] ld_count = '0;
  logic tab_we = 0, tab_coef = 0, pc_we = 0, im_we = 0, pl_we = 0, pm_we = 0;
  logic [1:0] tab_term = '0;
  logic [TAB_AW-1:0] tab_addr = '0;
  fp32_t tab_data = '0, im_data = '0, q_data = '0, bc_data = '0;
  logic [2*TYPE_W-1:0] pc_addr = '0;
  vec3f_t pc_data = '0;
  logic [TYPE_W-1:0] im_addr = '0, q_addr = '0;
  logic [$clog2(NBOND)-1:0] pl_addr = '0;
  bond_t pl_data = '0;
  logic [$clog2(NBOND+1)-1:0] npairs = '0;
  logic [GID_W-1:0] pm_gid = '0, lrf_gid = '0;
  pos_t pm_pos = '0;
  logic q_we = 0, bc_we = 0, grid_clear = 0, grid_clearing, lr_map_done, lrf_we = 0;
  logic [1:0] bc_fn = '0, bc_pow = '0;
  logic [15:0][AW-1:0] fft_addr = '0;
  fp32_t [15:0] fft_rd_re, fft_rd_im, fft_wr_re = '0, fft_wr_im = '0;
  logic [15:0] fft_we = '0;
  vec3f_t lrf_f = '0;
  logic mu_valid, mu_migrated;
  particle_t mu_p;
  vec3f_t mu_v;
  logic [CELL_W-1:0] mu_cell;
  logic [31:0] cnt_stall, cnt_requeue, cnt_migrate, cnt_overflow, cnt_rdconf;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #200000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  md_top #(.NCX(NC), .NCY(NC), .NCZ(NC), .NPIPE(NPIPE), .G(G), .NPART(NPART), .NBOND(NBOND),
           .BOX(BOX)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // particles by gid
  int  np;
  real px [NPART], py [NPART], pz [NPART], vx [NPART], vy [NPART], vz [NPART];
  real fx [NPART], fy [NPART], fz [NPART], mg [NPART], imv [NPART], qv [NPART];
  int  ptyp [NPART];
  int  seen [NPART];
  real pb, pq;

  always @(posedge clk) if (rst_n && mu_valid) begin
    int g;
    g = int'(mu_p.gid);
    seen[g]++;
  end

  int vfail = 0;
  task automatic check_step1();
    for (int g = 0; g < np; g++) begin
      real tol, evx, evy, evz;
      evx = vx[g] + fx[g] * imv[g] * 0.5;
      evy = vy[g] + fy[g] * imv[g] * 0.5;
      evz = vz[g] + fz[g] * imv[g] * 0.5;
      tol = 2e-3 * mg[g] * imv[g] * 0.5 + 1e-4 * (1.0 + rabs(vx[g]));
      checks++;
      if (rabs(got_vx[g] - evx) > tol || rabs(got_vy[g] - evy) > tol || rabs(got_vz[g] - evz) > tol) begin
        failures++;
        vfail++;
        if (vfail < 5) $display("gid %0d v %f %f %f exp %f %f %f", g, got_vx[g], got_vy[g], got_vz[g], evx, evy, evz);
      end
    end
  endtask

  real got_vx [NPART], got_vy [NPART], got_vz [NPART];
  always @(posedge clk) if (rst_n && mu_valid) begin
    got_vx[mu_p.gid] = f2r(mu_v.x); got_vy[mu_p.gid] = f2r(mu_v.y); got_vz[mu_p.gid] = f2r(mu_v.z);
  end

  real cf [4][4] = '{'{1.0/6, -0.5, 0.5, -1.0/6}, '{4.0/6, 0.0, -1.0, 0.5},
                     '{1.0/6, 0.5, 0.5, -0.5}, '{0.0, 0.0, 0.0, 1.0/6}};

  initial begin
    real box, ce, qtot, gtot;
    int cnt [NCELL];
    int cellof [NPART];
    int slotof [NPART];
    box = fx2r(BOX); ce = box / NC;
    dt = r2f(0.5);
    pb = -20.0; pq = 3.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- particles
    np = 0;
    for (int c = 0; c < NCELL; c++) begin
      cnt[c] = 24 + int'($urandom % 8);
      for (int s = 0; s < cnt[c]; s++) begin
        particle_t p;
        p = '0;
        p.gid = GID_W'(np);
        p.ptype = TYPE_W'($urandom % 3);
        p.pos.x = r2fx(((c / 9) + 0.02 + 0.96 * urand01()) * ce);
        p.pos.y = r2fx((((c / 3) % 3) + 0.02 + 0.96 * urand01()) * ce);
        p.pos.z = r2fx(((c % 3) + 0.02 + 0.96 * urand01()) * ce);
        px[np] = fx2r(p.pos.x); py[np] = fx2r(p.pos.y); pz[np] = fx2r(p.pos.z);
        ptyp[np] = int'(p.ptype);
        @(negedge clk) ld_en = 1; ld_cell = CELL_W'(c); ld_slot = SLOT_W'(s); ld_p = p;
        ld_v = '{r2f((urand01() - 0.5) * 8.0), r2f((urand01() - 0.5) * 8.0), r2f((urand01() - 0.5) * 8.0)};
        vx[np] = f2r(ld_v.x); vy[np] = f2r(ld_v.y); vz[np] = f2r(ld_v.z);
        cellof[np] = c; slotof[np] = s;
        fx[np] = 0; fy[np] = 0; fz[np] = 0; mg[np] = 0; seen[np] = 0;
        // bonded position copy
        @(negedge clk) ld_en = 0; pm_we = 1; pm_gid = p.gid; pm_pos = p.pos;
        // LR force
        @(negedge clk) pm_we = 0; lrf_we = 1; lrf_gid = p.gid;
        lrf_f = '{r2f(0.25), r2f(-0.5), r2f(real'(np % 3))};
        fx[np] += 0.25; fy[np] += -0.5; fz[np] += real'(np % 3);
        mg[np] += 3.0;
        @(negedge clk) lrf_we = 0;
        np++;
      end
      @(negedge clk) ld_count_en = 1; ld_cell = CELL_W'(c); ld_count = (SLOT_W+1)'(cnt[c]);
      @(negedge clk) ld_count_en = 0;
    end
    // ---- tables, masses, charges, basis
    for (int t = 0; t < 3; t++)
      for (int c = 0; c < 2; c++)
        for (int a = 0; a < (1 << TAB_AW); a++) begin
          @(negedge clk) tab_we = 1; tab_term = 2'(t); tab_coef = c[0]; tab_addr = TAB_AW'(a);
          tab_data = r2f(tab_c(t, c, a));
        end
    @(negedge clk) tab_we = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk) pc_we = 1; pc_addr = 8'(i); pc_data = '{32'h0, r2f(pb), r2f(pq)};
    end
    @(negedge clk) pc_we = 0;
    for (int t = 0; t < 16; t++) begin
      @(negedge clk) im_we = 1; im_addr = TYPE_W'(t); im_data = r2f(0.1 + 0.05 * t);
      q_we = 1; q_addr = TYPE_W'(t); q_data = r2f(real'(t) - 0.5);
    end
    @(negedge clk) im_we = 0; q_we = 0;
    qtot = 0;
    for (int g = 0; g < np; g++) begin
      imv[g] = f2r(r2f(0.1 + 0.05 * ptyp[g]));
      qtot += real'(ptyp[g]) - 0.5;
    end
    for (int f = 0; f < 4; f++)
      for (int pw = 0; pw < 4; pw++) begin
        @(negedge clk) bc_we = 1; bc_fn = 2'(f); bc_pow = 2'(pw); bc_data = r2f(cf[f][pw]);
      end
    @(negedge clk) bc_we = 0;
    // ---- bonds between particles of the same cell
    for (int b = 0; b < NB; b++) begin
      int i, j;
      real dx, dy, dz, r, c;
      i = int'($urandom % np);
      j = (slotof[i] == 0) ? i + 1 : i - 1;
      @(negedge clk) pl_we = 1; pl_addr = $clog2(NBOND)'(b);
      pl_data = '{GID_W'(i), GID_W'(j), r2f(50.0), r2f(1.5)};
      dx = fx2r(pbc_wrap(r2fx(px[i]) - r2fx(px[j]), BOX));
      dy = fx2r(pbc_wrap(r2fx(py[i]) - r2fx(py[j]), BOX));
      dz = fx2r(pbc_wrap(r2fx(pz[i]) - r2fx(pz[j]), BOX));
      r = $sqrt(dx * dx + dy * dy + dz * dz);
      c = -2.0 * 50.0 * (r - 1.5) / r;
      fx[i] += c * dx; fy[i] += c * dy; fz[i] += c * dz;
      fx[j] -= c * dx; fy[j] -= c * dy; fz[j] -= c * dz;
      mg[i] += rabs(c) * r; mg[j] += rabs(c) * r;
    end
    @(negedge clk) pl_we = 0; npairs = ($clog2(NBOND+1))'(NB);
    // ---- RL model over all particle pairs (each unordered pair once)
    for (int a = 0; a < np; a++)
      for (int b = a + 1; b < np; b++) begin
        real d [3], r2, fr;
        d[0] = fx2r(pbc_wrap(r2fx(px[a]) - r2fx(px[b]), BOX));
        d[1] = fx2r(pbc_wrap(r2fx(py[a]) - r2fx(py[b]), BOX));
        d[2] = fx2r(pbc_wrap(r2fx(pz[a]) - r2fx(pz[b]), BOX));
        r2 = d[0] * d[0] + d[1] * d[1] + d[2] * d[2];
        if (r2 >= 81.0) continue;
        fr = pb * interp(1, r2) + pq * interp(2, r2);
        fx[a] += fr * d[0]; fy[a] += fr * d[1]; fz[a] += fr * d[2];
        fx[b] -= fr * d[0]; fy[b] -= fr * d[1]; fz[b] -= fr * d[2];
        mg[a] += rabs(fr) * $sqrt(r2); mg[b] += rabs(fr) * $sqrt(r2);
      end
    // ---- grid clear, then step 1
    @(negedge clk) grid_clear = 1;
    @(negedge clk) grid_clear = 0;
    wait (!grid_clearing);
    @(negedge clk) step_start = 1;
    @(negedge clk) step_start = 0;
    wait (step_done);
    repeat (3) @(posedge clk);
    for (int g = 0; g < np; g++) chk(seen[g] == 1, $sformatf("step 1: gid %0d updated %0d times", g, seen[g]));
    check_step1();
    chk(lr_map_done, "grid mapping finished");
    // total charge on the grid
    gtot = 0;
    for (int a = 0; a < (1 << AW); a++) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) fft_addr[b] = AW'(a);
      #1;
      for (int b = 0; b < 16; b++) gtot += f2r(fft_rd_re[b]);
    end
    chk(near(gtot, qtot, 1e-3, 1e-2), $sformatf("grid charge %f vs %f", gtot, qtot));
    // ---- step 2
    for (int g = 0; g < np; g++) seen[g] = 0;
    @(negedge clk) step_start = 1;
    @(negedge clk) step_start = 0;
    wait (step_done);
    repeat (3) @(posedge clk);
    for (int g = 0; g < np; g++) chk(seen[g] == 1, $sformatf("step 2: gid %0d updated %0d times", g, seen[g]));
    $display("stall=%0d requeue=%0d migrate=%0d rdconf=%0d overflow=%0d",
             cnt_stall, cnt_requeue, cnt_migrate, cnt_rdconf, cnt_overflow);
    chk(cnt_stall > 0, "generator stall never happened");
    chk(cnt_requeue > 0, "force-cache re-queue never happened");
    chk(cnt_migrate > 0, "migration never happened");
    chk(cnt_rdconf > 0, "cell-read conflict never happened");
    chk(cnt_overflow == 0, "cell overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rl_unit: one RL pipeline (generator, 8 filters, force pipeline, reference
// accumulator) on a 3x3x3-cell box of 28.5 A with random particles.  The tb is
// the cell memory and the force caches: it adds every output force into a
// per-particle sum, accepting outputs at a random rate so that the queues fill
// and the generator is held back.  The sums are compared with a model that
// evaluates every half-shell pair of this pipeline's homecells within the
// cutoff (force on the reference, opposite force on the neighbour).  Fails if
// the generator never stalled.
module tb_rl_unit;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int NC = 3, NCELL = 27, NPIPE = 2, N = LANES;
  localparam fix_t BOX = fix_t'(28.5 * 1048576.0);
  logic clk = 0, rst_n = 0, start = 0, rd_req, rd_gnt = 0;
  logic [NCELL-1:0][SLOT_W:0] cell_count;
  logic [CELL_W-1:0] rd_cell, out_cell, done_cell;
  logic [SLOT_W-1:0] rd_row, out_slot;
  particle_t [N-1:0] rd_data;
  logic tab_we = 0, tab_coef = 0, pc_we = 0;
  logic [1:0] tab_term = '0;
  logic [TAB_AW-1:0] tab_addr = '0;
  fp32_t tab_data = '0;
  logic [2*TYPE_W-1:0] pc_addr = '0;
  vec3f_t pc_data = '0, out_f;
  logic out_valid, out_ready = 0, cell_done, all_done, stalled;
  int checks = 0, failures = 0, nstall = 0, ndone = 0;
  always #5 clk = ~clk;
  initial begin #50000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  rl_unit #(.NCX(NC), .NCY(NC), .NCZ(NC), .NPIPE(NPIPE), .PIPE(1), .N(N), .BOX(BOX)) dut (.*);

  int cnt [NCELL];
  particle_t part [NCELL][32];
  always_comb for (int c = 0; c < NCELL; c++) cell_count[c] = (SLOT_W+1)'(cnt[c]);
  always @(posedge clk)
    for (int j = 0; j < N; j++) rd_data[j] <= part[int'(rd_cell)][(int'(rd_row) * N + j) % 32];
  always @(negedge clk) begin
    rd_gnt = ($urandom % 4) != 0;
    out_ready = ($urandom % 3) == 0;
  end

  real gx [NCELL][32], gy [NCELL][32], gz [NCELL][32];
  real ex [NCELL][32], ey [NCELL][32], ez [NCELL][32], mag [NCELL][32];
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      gx[out_cell][out_slot] += f2r(out_f.x);
      gy[out_cell][out_slot] += f2r(out_f.y);
      gz[out_cell][out_slot] += f2r(out_f.z);
    end
    if (stalled) nstall++;
    if (cell_done) ndone++;
  end

  real pa, pb, pq;
  initial begin
    real box, cedge;
    box = fx2r(BOX); cedge = box / NC;
    for (int c = 0; c < NCELL; c++) begin
      cnt[c] = 8 + int'($urandom % 13);
      for (int s = 0; s < 32; s++) begin
        part[c][s] = '0;
        part[c][s].gid = GID_W'(c * 32 + s);
        part[c][s].ptype = TYPE_W'($urandom % 2);
        part[c][s].pos.x = r2fx(((c / 9) + 0.02 + 0.96 * urand01()) * cedge);
        part[c][s].pos.y = r2fx((((c / 3) % 3) + 0.02 + 0.96 * urand01()) * cedge);
        part[c][s].pos.z = r2fx(((c % 3) + 0.02 + 0.96 * urand01()) * cedge);
        gx[c][s] = 0; gy[c][s] = 0; gz[c][s] = 0;
        ex[c][s] = 0; ey[c][s] = 0; ez[c][s] = 0; mag[c][s] = 0;
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++)
      for (int c = 0; c < 2; c++)
        for (int a = 0; a < (1 << TAB_AW); a++) begin
          @(negedge clk) tab_we = 1; tab_term = 2'(t); tab_coef = c[0]; tab_addr = TAB_AW'(a);
          tab_data = r2f(tab_c(t, c, a));
        end
    @(negedge clk) tab_we = 0;
    pa = 0.0; pb = -20.0; pq = 3.0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk) pc_we = 1; pc_addr = 8'(i); pc_data = '{r2f(pa), r2f(pb), r2f(pq)};
    end
    @(negedge clk) pc_we = 0;
    // model
    for (int h = 1; h < NCELL; h += NPIPE) begin
      int hx, hy, hz;
      hx = h / 9; hy = (h / 3) % 3; hz = h % 3;
      for (int k = 0; k < 14; k++) begin
        logic [5:0] o;
        int nc;
        o = n3l_offset(4'(k));
        nc = ((hx + int'(o[5:4]) - 1 + NC) % NC) * 9 + ((hy + int'(o[3:2]) - 1 + NC) % NC) * 3
           + (hz + int'(o[1:0]) - 1 + NC) % NC;
        for (int r = 0; r < cnt[h]; r++)
          for (int s = 0; s < cnt[nc]; s++) begin
            real d [3], r2, fr;
            if (k == 0 && s <= r) continue;
            d[0] = fx2r(pbc_wrap(part[h][r].pos.x - part[nc][s].pos.x, BOX));
            d[1] = fx2r(pbc_wrap(part[h][r].pos.y - part[nc][s].pos.y, BOX));
            d[2] = fx2r(pbc_wrap(part[h][r].pos.z - part[nc][s].pos.z, BOX));
            r2 = d[0] * d[0] + d[1] * d[1] + d[2] * d[2];
            if (r2 >= 81.0) continue;
            fr = pb * interp(1, r2) + pq * interp(2, r2);
            ex[h][r] += fr * d[0]; ey[h][r] += fr * d[1]; ez[h][r] += fr * d[2];
            ex[nc][s] -= fr * d[0]; ey[nc][s] -= fr * d[1]; ez[nc][s] -= fr * d[2];
            mag[h][r] += rabs(fr) * $sqrt(r2); mag[nc][s] += rabs(fr) * $sqrt(r2);
          end
      end
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (all_done);
    repeat (20) @(posedge clk);
    for (int c = 0; c < NCELL; c++)
      for (int s = 0; s < cnt[c]; s++) begin
        real tol;
        tol = 1e-3 * mag[c][s] + 1e-5;
        checks++;
        if (rabs(gx[c][s] - ex[c][s]) > tol || rabs(gy[c][s] - ey[c][s]) > tol || rabs(gz[c][s] - ez[c][s]) > tol) begin
          failures++;
          if (failures < 5) $display("cell %0d slot %0d got %f %f %f exp %f %f %f", c, s, gx[c][s], gy[c][s], gz[c][s], ex[c][s], ey[c][s], ez[c][s]);
        end
      end
    checks++;
    if (nstall == 0 || ndone != 13) begin failures++; $display("stalls %0d cell_done %0d", nstall, ndone); end
    $display("stall cycles %0d", nstall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

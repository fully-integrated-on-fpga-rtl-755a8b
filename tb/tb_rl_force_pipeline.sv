// tb_rl_force_pipeline: loads the interpolation tables for r^-14, r^-8, r^-3
// and per-type-pair A, B, QQ, then sends random pairs (inside and outside the
// cutoff, some across the box face), one per cycle with gaps.  Each output is
// compared with F = (A r^-14 + B r^-8 + QQ r^-3) (r_ref - r_nbr) evaluated with
// the same interpolation in real arithmetic, zero beyond the cutoff; ids must
// come out in order with the force.
module tb_rl_force_pipeline;
  import md_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, tab_we = 0, pc_we = 0, out_valid, busy;
  pair_t in_pair = '0;
  logic [1:0] tab_term = '0;
  logic tab_coef = 0;
  logic [TAB_AW-1:0] tab_addr = '0;
  fp32_t tab_data = '0;
  logic [2*TYPE_W-1:0] pc_addr = '0;
  vec3f_t pc_data = '0, out_f;
  pid_t out_ref_id, out_nbr_id;
  int checks = 0, failures = 0, nzero = 0, nforce = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  rl_force_pipeline dut (.*);

  typedef struct { real fx, fy, fz; pid_t rid, nid; } exp_t;
  exp_t q [$];
  real pa [256], pb [256], pq [256];

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (out_ref_id != e.rid || out_nbr_id != e.nid || !near(f2r(out_f.x), e.fx, 2e-3, 1e-6)
        || !near(f2r(out_f.y), e.fy, 2e-3, 1e-6) || !near(f2r(out_f.z), e.fz, 2e-3, 1e-6)) begin
      failures++;
      if (failures < 5) $display("got %g %g %g exp %g %g %g", f2r(out_f.x), f2r(out_f.y), f2r(out_f.z), e.fx, e.fy, e.fz);
    end
    if (e.fx == 0.0 && e.fy == 0.0) nzero++; else nforce++;
  end

  initial begin
    real box;
    box = fx2r(BOX_FIX);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++)
      for (int c = 0; c < 2; c++)
        for (int a = 0; a < (1 << TAB_AW); a++) begin
          @(negedge clk) tab_we = 1; tab_term = 2'(t); tab_coef = c[0]; tab_addr = TAB_AW'(a);
          tab_data = r2f(tab_c(t, c, a));
        end
    @(negedge clk) tab_we = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk) pc_we = 1; pc_addr = 8'(i);
      pc_data = '{r2f(1000.0 * (1 + i % 3)), r2f(-20.0 * (1 + i % 5)), r2f(real'(i % 7) - 3.0)};
      pa[i] = f2r(pc_data.x); pb[i] = f2r(pc_data.y); pq[i] = f2r(pc_data.z);
    end
    @(negedge clk) pc_we = 0;
    for (int i = 0; i < 3000; i++) begin
      exp_t e;
      real d [3], r2, fr;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_pair = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      in_pair.ref_p.pos = '{r2fx(urand01() * box), r2fx(urand01() * box), r2fx(urand01() * box)};
      in_pair.nbr_p.pos.x = r2fx(fx2r(in_pair.ref_p.pos.x) + (urand01() - 0.5) * 16.0);
      in_pair.nbr_p.pos.y = r2fx(fx2r(in_pair.ref_p.pos.y) + (urand01() - 0.5) * 16.0);
      in_pair.nbr_p.pos.z = r2fx(fx2r(in_pair.ref_p.pos.z) + (urand01() - 0.5) * 16.0);
      if (fx2r(in_pair.nbr_p.pos.x) < 0) in_pair.nbr_p.pos.x += BOX_FIX;
      if (fx2r(in_pair.nbr_p.pos.x) >= box) in_pair.nbr_p.pos.x -= BOX_FIX;
      d[0] = fx2r(pbc_wrap(in_pair.ref_p.pos.x - in_pair.nbr_p.pos.x, BOX_FIX));
      d[1] = fx2r(pbc_wrap(in_pair.ref_p.pos.y - in_pair.nbr_p.pos.y, BOX_FIX));
      d[2] = fx2r(pbc_wrap(in_pair.ref_p.pos.z - in_pair.nbr_p.pos.z, BOX_FIX));
      r2 = d[0] * d[0] + d[1] * d[1] + d[2] * d[2];
      if (in_valid) begin
        int tp;
        tp = int'({in_pair.ref_p.ptype, in_pair.nbr_p.ptype});
        fr = (r2 >= 81.0) ? 0.0 : pa[tp] * interp(0, r2) + pb[tp] * interp(1, r2) + pq[tp] * interp(2, r2);
        e.fx = fr * d[0]; e.fy = fr * d[1]; e.fz = fr * d[2];
        e.rid = in_pair.ref_id; e.nid = in_pair.nbr_id;
        q.push_back(e);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (q.size() != 0 || busy || nzero < 50 || nforce < 50) begin
      failures++; $display("left %0d, zero %0d, force %0d", q.size(), nzero, nforce);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_motion_update: random particles, velocities and forces (large enough that
// many particles leave their cell, some across the box face), random inverse
// masses per type.  Each output is compared with a real-arithmetic model of
// v' = v + F/m dt, r' = r + v' dt (wrapped into the box); the output cell must
// be the cell that contains r', and the migrated flag must be set exactly when
// that differs from the input cell.
module tb_motion_update;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int NC = NCELL_X;
  logic clk = 0, rst_n = 0, in_valid = 0, im_we = 0;
  fp32_t dt, im_data = '0;
  logic [TYPE_W-1:0] im_addr = '0;
  particle_t in_p = '0, out_p;
  vec3f_t in_v = '0, in_f = '0, out_v;
  logic [CELL_W-1:0] in_cell = '0, out_cell;
  logic out_valid, out_migrated;
  int checks = 0, failures = 0, nmig = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  motion_update dut (.*);

  typedef struct { real x, y, z, vx, vy, vz; int cl; } exp_t;
  exp_t q [$];
  real imr [16];
  real box;

  function automatic int cidx(input real r);
    int i;
    i = int'($floor(r / (box / NC)));
    return i < 0 ? 0 : (i >= NC ? NC - 1 : i);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int c;
    e = q.pop_front();
    c = cidx(fx2r(out_p.pos.x)) * NC * NC + cidx(fx2r(out_p.pos.y)) * NC + cidx(fx2r(out_p.pos.z));
    checks += 3;
    if (!near(fx2r(out_p.pos.x), e.x, 0, 1e-4) || !near(fx2r(out_p.pos.y), e.y, 0, 1e-4)
        || !near(fx2r(out_p.pos.z), e.z, 0, 1e-4)) begin
      failures++;
      if (failures < 5) $display("pos %f %f %f exp %f %f %f", fx2r(out_p.pos.x), fx2r(out_p.pos.y), fx2r(out_p.pos.z), e.x, e.y, e.z);
    end
    if (!near(f2r(out_v.x), e.vx, 1e-5, 1e-6) || !near(f2r(out_v.z), e.vz, 1e-5, 1e-6)) failures++;
    if (int'(out_cell) != c || out_migrated != (c != e.cl)) begin
      failures++;
      if (failures < 5) $display("cell %0d exp %0d mig %0b", out_cell, c, out_migrated);
    end
    nmig += out_migrated;
  end

  initial begin
    box = fx2r(BOX_FIX);
    dt = r2f(0.5);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      @(negedge clk) im_we = 1; im_addr = TYPE_W'(t); imr[t] = 0.05 + 0.01 * t; im_data = r2f(imr[t]);
    end
    @(negedge clk) im_we = 0;
    for (int i = 0; i < 1000; i++) begin
      exp_t e;
      real r [3], vv [3], ff [3], vn;
      fix_t rf [3];
      @(negedge clk);
      in_valid = ($urandom % 5) != 0;
      for (int d = 0; d < 3; d++) begin
        r[d] = urand01() * box;
        if (i % 7 == 0) r[d] = box - 0.01;
        if (i % 7 == 1) r[d] = 0.01;
        rf[d] = r2fx(r[d]);
        vv[d] = (urand01() - 0.5) * 4.0;
        ff[d] = (urand01() - 0.5) * 20.0;
      end
      in_p.pos = '{rf[0], rf[1], rf[2]};
      in_p.gid = GID_W'(i);
      in_p.ptype = TYPE_W'($urandom);
      in_v = '{r2f(vv[0]), r2f(vv[1]), r2f(vv[2])};
      in_f = '{r2f(ff[0]), r2f(ff[1]), r2f(ff[2])};
      in_cell = CELL_W'(cidx(fx2r(rf[0])) * NC * NC + cidx(fx2r(rf[1])) * NC + cidx(fx2r(rf[2])));
      if (in_valid) begin
        real rn [3], vo [3];
        for (int d = 0; d < 3; d++) begin
          vn = f2r(d == 0 ? in_v.x : d == 1 ? in_v.y : in_v.z)
             + f2r(d == 0 ? in_f.x : d == 1 ? in_f.y : in_f.z) * imr[in_p.ptype] * 0.5;
          vo[d] = vn;
          rn[d] = fx2r(rf[d]) + vn * 0.5;
          if (rn[d] < 0) rn[d] += box;
          if (rn[d] >= box) rn[d] -= box;
        end
        e.x = rn[0]; e.y = rn[1]; e.z = rn[2]; e.vx = vo[0]; e.vy = vo[1]; e.vz = vo[2];
        e.cl = int'(in_cell);
        q.push_back(e);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (q.size() != 0 || nmig < 100) begin failures++; $display("left %0d migrations %0d", q.size(), nmig); end
    $display("migrations: %0d", nmig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

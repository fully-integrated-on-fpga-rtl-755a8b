// tb_bonded_unit: 150 particles at random positions (a few across the box
// face from their partners), 300 random bonds between particles that are at most
// a few Angstrom apart (particles appear in many bonds, often in consecutive
// ones).  After done, the force of every particle is read (and cleared) and
// compared with the sum over its bonds of -2k(r-r0)(r_i-r_j)/r and its opposite.
// A second pass with start again must give the same forces.
module tb_bonded_unit;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int NPART = 23588, NBOND = 32768, NP = 150, NB = 300;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [$clog2(NBOND+1)-1:0] npairs = '0;
  logic pl_we = 0, pm_we = 0, rd_en = 0;
  logic [$clog2(NBOND)-1:0] pl_addr = '0;
  bond_t pl_data = '0;
  logic [GID_W-1:0] pm_gid = '0, rd_gid = '0;
  pos_t pm_pos = '0;
  vec3f_t rd_f;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  bonded_unit #(.NPART(NPART), .NBOND(NBOND)) dut (.*);

  real px [NP], py [NP], pz [NP], fx [NP], fy [NP], fz [NP];
  real box;

  function automatic real wrapd(input real d);
    if (d > box / 2) return d - box;
    if (d < -box / 2) return d + box;
    return d;
  endfunction

  initial begin
    box = fx2r(BOX_FIX);
    for (int i = 0; i < NP; i++) begin
      real c;
      c = (i / 10) * 4.1;
      px[i] = c + urand01() * 1.5; py[i] = 10 + urand01() * 1.5; pz[i] = (i % 10 == 0) ? 0.2 : 61.9;
      fx[i] = 0; fy[i] = 0; fz[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NP; i++) begin
      @(negedge clk) pm_we = 1; pm_gid = GID_W'(i);
      pm_pos = '{r2fx(px[i]), r2fx(py[i]), r2fx(pz[i])};
      px[i] = fx2r(pm_pos.x); py[i] = fx2r(pm_pos.y); pz[i] = fx2r(pm_pos.z);
    end
    @(negedge clk) pm_we = 0;
    for (int b = 0; b < NB; b++) begin
      int i, j;
      real k, r0, dx, dy, dz, r, c;
      i = int'($urandom % NP);
      j = (i / 10) * 10 + int'($urandom % 10);
      if (j == i) j = (i % 10 == 9) ? i - 1 : i + 1;
      k = 100.0 + urand01() * 400.0; r0 = 0.8 + urand01();
      @(negedge clk) pl_we = 1; pl_addr = $clog2(NBOND)'(b);
      pl_data = '{GID_W'(i), GID_W'(j), r2f(k), r2f(r0)};
      k = f2r(pl_data.k); r0 = f2r(pl_data.r0);
      dx = wrapd(px[i] - px[j]); dy = wrapd(py[i] - py[j]); dz = wrapd(pz[i] - pz[j]);
      r = $sqrt(dx * dx + dy * dy + dz * dz);
      c = -2.0 * k * (r - r0) / r;
      fx[i] += c * dx; fy[i] += c * dy; fz[i] += c * dz;
      fx[j] -= c * dx; fy[j] -= c * dy; fz[j] -= c * dz;
    end
    @(negedge clk) pl_we = 0; npairs = ($clog2(NBOND+1))'(NB);
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      wait (done);
      for (int i = 0; i < NP; i++) begin
        @(negedge clk) rd_en = 1; rd_gid = GID_W'(i); #1;
        checks++;
        if (!near(f2r(rd_f.x), fx[i], 2e-3, 0.05) || !near(f2r(rd_f.y), fy[i], 2e-3, 0.05)
            || !near(f2r(rd_f.z), fz[i], 2e-3, 0.05)) begin
          failures++;
          if (failures < 5) $display("gid %0d got %f %f %f exp %f %f %f", i, f2r(rd_f.x), f2r(rd_f.y), f2r(rd_f.z), fx[i], fy[i], fz[i]);
        end
      end
      @(negedge clk) rd_en = 0; rd_gid = '0; #1;
      checks++;
      if (rd_f != '0) begin failures++; $display("not cleared"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

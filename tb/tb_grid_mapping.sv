// tb_grid_mapping: loads the cubic B-spline as the four basis polynomials,
// sends random particles (some at the box faces, to exercise the periodic
// wrap) and sums every grid write per (bank, address).  The result is compared
// with a model that spreads q*phi_i(x)*phi_j(y)*phi_k(z) over the 4x4x4 points
// g-1..g+2; the total charge on the grid must equal the sum of the charges.
module tb_grid_mapping;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int G = 64, AW = $clog2(G * G * G / 16);
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, busy;
  pos_t in_pos = '0;
  fp32_t in_q = '0;
  logic bc_we = 0;
  logic [1:0] bc_fn = '0, bc_pow = '0;
  fp32_t bc_data = '0;
  logic [15:0] acc_en;
  logic [15:0][AW-1:0] acc_addr;
  fp32_t [15:0] acc_val;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  grid_mapping #(.G(G)) dut (.*);

  real got [int];
  real expv [int];
  real qsum = 0;
  real cf [4][4] = '{'{1.0/6, -0.5, 0.5, -1.0/6}, '{4.0/6, 0.0, -1.0, 0.5},
                     '{1.0/6, 0.5, 0.5, -0.5}, '{0.0, 0.0, 0.0, 1.0/6}};
  localparam logic [47:0] SCALE = 48'((longint'(G) << 40) / longint'(BOX_FIX));

  always @(posedge clk) if (rst_n)
    for (int b = 0; b < 16; b++) if (acc_en[b]) begin
      int key;
      key = b * (1 << AW) + int'(acc_addr[b]);
      if (!got.exists(key)) got[key] = 0;
      got[key] += f2r(acc_val[b]);
    end

  function automatic real phi(input int f, input real o);
    return ((cf[f][3] * o + cf[f][2]) * o + cf[f][1]) * o + cf[f][0];
  endfunction

  task automatic model(input pos_t p, input real q);
    int g [3];
    real o [3];
    fix_t r [3];
    r[0] = p.x; r[1] = p.y; r[2] = p.z;
    for (int d = 0; d < 3; d++) begin
      logic [63:0] u;
      u = (64'(r[d]) * 64'(SCALE)) >> 20;
      g[d] = int'(u >> 20) % G;
      o[d] = real'(u & 64'hf_ffff) / 1048576.0;
    end
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        for (int k = 0; k < 4; k++) begin
          int X, Y, Z, key;
          X = (g[0] - 1 + i + G) % G; Y = (g[1] - 1 + j + G) % G; Z = (g[2] - 1 + k + G) % G;
          key = ((Y % 4) * 4 + Z % 4) * (1 << AW) + (X * (G / 4) + Y / 4) * (G / 4) + Z / 4;
          if (!expv.exists(key)) expv[key] = 0;
          expv[key] += q * phi(i, o[0]) * phi(j, o[1]) * phi(k, o[2]);
        end
  endtask

  initial begin
    real tot;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++)
      for (int pw = 0; pw < 4; pw++) begin
        @(negedge clk) bc_we = 1; bc_fn = 2'(f); bc_pow = 2'(pw); bc_data = r2f(cf[f][pw]);
      end
    @(negedge clk) bc_we = 0;
    for (int i = 0; i < 60; i++) begin
      real q;
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1;
      in_pos.x = r2fx(urand01() * 62.2); in_pos.y = r2fx(urand01() * 62.2); in_pos.z = r2fx(urand01() * 62.2);
      if (i % 10 == 0) in_pos.x = r2fx(62.2);
      if (i % 10 == 1) in_pos.y = r2fx(0.01);
      q = real'(int'($urandom % 5) - 2) * 0.5 + 0.25;
      in_q = r2f(q);
      qsum += f2r(in_q);
      model(in_pos, f2r(in_q));
      @(negedge clk) in_valid = 0;
    end
    repeat (20) @(posedge clk);
    tot = 0;
    foreach (expv[k]) begin
      checks++;
      if (!got.exists(k) || !near(got[k], expv[k], 1e-3, 1e-4)) begin
        failures++;
        if (failures < 5) $display("key %0d got %f exp %f", k, got.exists(k) ? got[k] : -999.0, expv[k]);
      end
    end
    foreach (got[k]) begin
      tot += got[k];
      if (!expv.exists(k) && rabs(got[k]) > 1e-4) begin checks++; failures++; end
    end
    checks++;
    if (!near(tot, qsum, 1e-3, 1e-3)) begin failures++; $display("total %f vs %f", tot, qsum); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_planar_filter: random position pairs (many near the cutoff), the pass bit
// is compared one cycle later with a model of the three planar tests on the
// periodic distance.
module tb_planar_filter;
  import md_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  pos_t a, b;
  logic pass;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  planar_filter dut (.clk, .rst_n, .in_valid, .ref_pos(a), .nbr_pos(b), .pass);

  function automatic bit model(input pos_t p, input pos_t q);
    real d[3], box, rc;
    box = fx2r(BOX_FIX); rc = fx2r(RC_FIX);
    d[0] = fx2r(p.x) - fx2r(q.x); d[1] = fx2r(p.y) - fx2r(q.y); d[2] = fx2r(p.z) - fx2r(q.z);
    for (int i = 0; i < 3; i++) begin
      if (d[i] > box / 2) d[i] -= box;
      if (d[i] < -box / 2) d[i] += box;
      d[i] = rabs(d[i]);
    end
    return d[0] < rc && d[1] < rc && d[2] < rc && d[0] + d[1] < fx2r(RC2_FIX)
        && d[0] + d[2] < fx2r(RC2_FIX) && d[1] + d[2] < fx2r(RC2_FIX)
        && d[0] + d[1] + d[2] < fx2r(RC3_FIX);
  endfunction

  int npass = 0;
  initial begin
    bit exp_v;
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      real span;
      span = (i % 2) ? 62.0 : 14.0;
      a.x = r2fx(urand01() * 62.0); a.y = r2fx(urand01() * 62.0); a.z = r2fx(urand01() * 62.0);
      b.x = r2fx((fx2r(a.x) + (urand01() - 0.5) * span) < 0 ? fx2r(a.x) + 30.0 : fx2r(a.x) + (urand01() - 0.5) * span);
      b.y = r2fx(urand01() * 62.0);
      b.z = r2fx(urand01() * 62.0);
      if (i % 3 == 0) begin b.y = a.y + r2fx((urand01() - 0.5) * 14.0); b.z = a.z + r2fx((urand01() - 0.5) * 14.0); end
      in_valid = 1;
      exp_v = model(a, b);
      @(posedge clk); #1;
      checks++;
      if (pass !== exp_v) begin
        failures++;
        if (failures < 5) $display("mismatch %0d: pass=%0b exp=%0b", i, pass, exp_v);
      end
      npass += exp_v;
    end
    checks++;
    if (npass < 100) begin failures++; $display("too few passing pairs %0d", npass); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_filter_bank: a reference particle and 8 candidate neighbours per cycle
// (random lane mask, about a third within the cutoff), sent while almost_full is
// low; the output is read with a random enable.  Every pair that passes the
// planar test must come out exactly once and nothing else; the test fails if
// almost_full never held the producer back.
module tb_filter_bank;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int N = LANES;
  logic clk = 0, rst_n = 0, in_valid = 0, enable = 0, out_valid, almost_full, empty;
  logic [N-1:0] in_mask = '0;
  particle_t ref_p = '0;
  pid_t ref_id = '0;
  particle_t [N-1:0] nbr_p = '0;
  pid_t [N-1:0] nbr_id = '0;
  pair_t out_pair;
  int checks = 0, failures = 0, nheld = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  filter_bank dut (.*);

  function automatic bit passes(input pos_t a, input pos_t b);
    fix_t d [3];
    d[0] = pbc_wrap(a.x - b.x, BOX_FIX); d[1] = pbc_wrap(a.y - b.y, BOX_FIX); d[2] = pbc_wrap(a.z - b.z, BOX_FIX);
    for (int i = 0; i < 3; i++) if (d[i] < 0) d[i] = -d[i];
    return d[0] < RC_FIX && d[1] < RC_FIX && d[2] < RC_FIX && d[0] + d[1] < RC2_FIX
        && d[0] + d[2] < RC2_FIX && d[1] + d[2] < RC2_FIX && d[0] + d[1] + d[2] < RC3_FIX;
  endfunction

  int expect_ref [int];
  int nexp = 0, ngot = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    int k;
    k = int'(out_pair.nbr_id);
    checks++;
    ngot++;
    if (!expect_ref.exists(k) || expect_ref[k] != int'(out_pair.ref_id)
        || !passes(out_pair.ref_p.pos, out_pair.nbr_p.pos)) begin
      failures++;
      if (failures < 5) $display("unexpected pair nbr %0d", k);
    end else expect_ref.delete(k);
  end

  always @(negedge clk) enable = ($urandom % 3) != 0;

  initial begin
    int uid;
    uid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      real box;
      box = 20.0;
      @(negedge clk);
      in_valid = 0;
      if (almost_full) begin
        nheld++;
        continue;
      end
      in_valid = 1;
      in_mask = N'($urandom);
      ref_id = pid_t'(i);
      ref_p.pos = '{r2fx(urand01() * box), r2fx(urand01() * box), r2fx(urand01() * box)};
      for (int j = 0; j < N; j++) begin
        nbr_id[j] = pid_t'(uid);
        nbr_p[j].pos = '{r2fx(urand01() * box), r2fx(urand01() * box), r2fx(urand01() * box)};
        if (in_mask[j] && passes(ref_p.pos, nbr_p[j].pos)) begin
          expect_ref[uid] = i;
          nexp++;
        end
        uid++;
      end
    end
    @(negedge clk) in_valid = 0;
    wait (empty);
    repeat (5) @(posedge clk);
    checks++;
    if (expect_ref.size() != 0 || nheld == 0) begin
      failures++; $display("missing %0d of %0d, held %0d", expect_ref.size(), nexp, nheld);
    end
    $display("pairs %0d, producer held %0d times", ngot, nheld);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

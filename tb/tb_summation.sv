// tb_summation: the tb plays the caches (combinational reads by cell/slot and
// by gid, idle flag held low for a while).  For a series of requested cells the
// outputs must come out in slot order with F = F_RL + F_LR + F_bonded (small
// integers, exact), the particle, velocity and cell passed through, the RL and
// bonded reads flagged with rd_en, and one cell_done per cell.
module tb_summation;
  import md_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, req_valid = 0, req_ready, rd_en, cache_idle = 0;
  logic [CELL_W-1:0] req_cell = '0, rd_cell, out_cell;
  logic [SLOT_W-1:0] rd_slot;
  logic [SLOT_W:0] cell_count;
  particle_t p_in, out_p;
  vec3f_t v_in, rl_f, lr_f, bf_f, out_v, out_f;
  logic [GID_W-1:0] gid;
  logic out_valid, cell_done;
  int checks = 0, failures = 0, ndone = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  summation dut (.*);

  // cache model: cell c has 5 + c % 60 particles, gid = c*64+slot
  function automatic int f_of(input int g, input int k);
    return (g * 7 + k * 3) % 19 - 9;
  endfunction
  assign cell_count = (SLOT_W+1)'(5 + int'(rd_cell) % 60);
  always_comb begin
    p_in = '0;
    p_in.gid = GID_W'(int'(rd_cell) * 64 + int'(rd_slot));
    p_in.pos.x = fix_t'(int'(rd_slot));
    v_in = '{r2f(real'(rd_slot)), 32'h0, 32'h0};
    rl_f = '{r2f(real'(f_of(int'(p_in.gid), 0))), r2f(1.0), 32'h0};
    lr_f = '{r2f(real'(f_of(int'(gid), 1))), r2f(2.0), 32'h0};
    bf_f = '{r2f(real'(f_of(int'(gid), 2))), r2f(4.0), 32'h0};
  end

  int exp_cell, exp_slot;
  always @(posedge clk) if (rst_n) begin
    if (rd_en) begin
      checks++;
    end
    if (out_valid) begin
      int g;
      g = exp_cell * 64 + exp_slot;
      checks++;
      if (int'(out_p.gid) != g || int'(out_cell) != exp_cell
          || f2r(out_f.x) != real'(f_of(g, 0) + f_of(g, 1) + f_of(g, 2))
          || f2r(out_f.y) != 7.0 || f2r(out_v.x) != real'(exp_slot)) begin
        failures++;
        if (failures < 5) $display("cell %0d slot %0d: gid %0d f %f", exp_cell, exp_slot, out_p.gid, f2r(out_f.x));
      end
      exp_slot++;
    end
    if (cell_done) ndone++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 12; i++) begin
      int c;
      c = int'($urandom % 343);
      @(negedge clk);
      while (!req_ready) @(negedge clk);
      req_valid = 1; req_cell = CELL_W'(c); cache_idle = 0;
      @(negedge clk) req_valid = 0;
      repeat ($urandom % 5) @(negedge clk);
      checks++;
      if (rd_en) begin failures++; $display("read before idle"); end
      exp_cell = c; exp_slot = 0;
      cache_idle = 1;
      wait (cell_done);
      @(negedge clk) cache_idle = 0;
      repeat (4) @(posedge clk);
      checks++;
      if (exp_slot != 5 + c % 60) begin failures++; $display("cell %0d: %0d outputs", c, exp_slot); end
    end
    checks++;
    if (ndone != 12) begin failures++; $display("cell_done %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

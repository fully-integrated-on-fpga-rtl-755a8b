// tb_particle_cache: loads a cell, checks the registered row read, the
// combinational particle and row reads, then appends particles to the other
// copy, swaps, and checks that they became the active contents; finally fills
// the other copy beyond capacity and checks wr_full and overflow.
module tb_particle_cache;
  import md_pkg::*;
  localparam int CAP = CELL_CAP, N = LANES;
  logic clk = 0, rst_n = 0;
  logic swap = 0, rd_en = 0, wr_en = 0, ld_en = 0, ld_count_en = 0;
  logic [SLOT_W:0] count, ld_count = '0;
  logic [SLOT_W-1:0] rd_row = '0, mu_slot = '0, cp_row = '0, ld_slot = '0;
  particle_t [N-1:0] rd_data, cp_data;
  particle_t mu_p, wr_p = '0, ld_p = '0;
  vec3f_t mu_v, wr_v = '0, ld_v = '0;
  logic wr_full, overflow;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  particle_cache dut (.*);

  particle_t refp [CAP];
  vec3f_t    refv [CAP];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endtask

  function automatic particle_t rndp();
    particle_t p;
    p = {$urandom, $urandom, $urandom, $urandom};
    return p;
  endfunction

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load
    n = 70;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      ld_en = 1; ld_slot = SLOT_W'(i); refp[i] = rndp(); refv[i] = {$urandom, $urandom, $urandom};
      ld_p = refp[i]; ld_v = refv[i];
    end
    @(negedge clk) ld_en = 0; ld_count_en = 1; ld_count = (SLOT_W+1)'(n);
    @(negedge clk) ld_count_en = 0;
    chk(count == (SLOT_W+1)'(n), "count after load");
    for (int r = 0; r < (n + N - 1) / N; r++) begin
      @(negedge clk) rd_en = 1; rd_row = SLOT_W'(r); cp_row = SLOT_W'(r);
      #1;
      for (int j = 0; j < N; j++) if (r * N + j < n) chk(cp_data[j] == refp[r * N + j], "cp row");
      @(negedge clk) rd_en = 0;
      for (int j = 0; j < N; j++) if (r * N + j < n) chk(rd_data[j] == refp[r * N + j], "rd row");
    end
    for (int i = 0; i < n; i++) begin
      mu_slot = SLOT_W'(i); #1;
      chk(mu_p == refp[i] && mu_v == refv[i], "mu read");
    end
    // append 40 to the other copy, then swap
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      wr_en = 1; refp[i] = rndp(); refv[i] = {$urandom, $urandom, $urandom};
      wr_p = refp[i]; wr_v = refv[i];
    end
    @(negedge clk) wr_en = 0;
    chk(count == (SLOT_W+1)'(n), "active count kept while writing");
    swap = 1;
    @(negedge clk) swap = 0;
    chk(count == (SLOT_W+1)'(40), "count after swap");
    for (int i = 0; i < 40; i++) begin
      mu_slot = SLOT_W'(i); #1;
      chk(mu_p == refp[i] && mu_v == refv[i], "read after swap");
    end
    // overflow
    chk(!overflow && !wr_full, "no overflow yet");
    for (int i = 0; i <= CAP; i++) begin
      @(negedge clk) wr_en = 1; wr_p = rndp();
    end
    @(negedge clk) wr_en = 0;
    chk(wr_full && overflow, "full and overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

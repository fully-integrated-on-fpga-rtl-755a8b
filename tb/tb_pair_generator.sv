// tb_pair_generator: 3x3x3 cells with random occupancy (0..20 particles), two
// pipelines, this generator is pipeline 0 (homecells 0, 2, 4, ...).  The tb is
// the cell memory (random grant, row one cycle later) and applies random
// stall.  Every generated (reference, neighbour) pair is recorded; the set must
// equal the pairs of each homecell particle with the later particles of its
// homecell and all particles of the 13 half-shell cells, each exactly once, and
// cell_done must report each homecell once, followed by all_done.
module tb_pair_generator;
  import md_pkg::*;
  localparam int NC = 3, NCELL = 27, NPIPE = 2, N = LANES;
  logic clk = 0, rst_n = 0, start = 0, rd_req, rd_gnt = 0, stall = 0, out_valid, flush;
  logic drain_idle = 0, cell_done, all_done;
  logic [NCELL-1:0][SLOT_W:0] cell_count;
  logic [CELL_W-1:0] rd_cell, done_cell;
  logic [SLOT_W-1:0] rd_row;
  particle_t [N-1:0] rd_data;
  logic [N-1:0] out_mask;
  particle_t ref_p;
  pid_t ref_id;
  particle_t [N-1:0] nbr_p;
  pid_t [N-1:0] nbr_id;
  int checks = 0, failures = 0, nstall = 0;
  always #5 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  pair_generator #(.NCX(NC), .NCY(NC), .NCZ(NC), .NPIPE(NPIPE), .PIPE(0), .N(N)) dut (.*);

  int cnt [NCELL];
  always_comb for (int c = 0; c < NCELL; c++) cell_count[c] = (SLOT_W+1)'(cnt[c]);

  // memory model
  always @(posedge clk) begin
    for (int j = 0; j < N; j++) begin
      rd_data[j] <= '0;
      rd_data[j].gid <= GID_W'(int'(rd_cell) * 32 + int'(rd_row) * N + j);
      rd_data[j].pos.x <= fix_t'(int'(rd_cell) * 1000 + int'(rd_row) * N + j);
    end
  end
  always @(negedge clk) begin
    rd_gnt = ($urandom % 4) != 0;
    stall = ($urandom % 8) == 0;
    drain_idle = ($urandom % 2) == 0;
  end
  always @(posedge clk) if (rst_n && stall && rd_req) nstall++;

  int got [int];
  int dones [int];
  int ndone = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid)
      for (int j = 0; j < N; j++) if (out_mask[j]) begin
        int k;
        checks++;
        if (int'(nbr_p[j].gid) % 32 >= cnt[int'(nbr_p[j].gid) / 32]) begin
          failures++; $display("pair with an empty slot");
        end
        if (nbr_p[j].gid != GID_W'(int'(nbr_id[j].cidx) * 32 + int'(nbr_id[j].slot))
            || ref_p.gid != GID_W'(int'(ref_id.cidx) * 32 + int'(ref_id.slot))) begin
          failures++; $display("id does not match particle");
        end
        k = int'(ref_p.gid) * 1024 + int'(nbr_p[j].gid);
        if (got.exists(k)) got[k]++; else got[k] = 1;
      end
    if (cell_done) begin
      checks++;
      if (dones.exists(int'(done_cell)) || int'(done_cell) % NPIPE != 0) begin
        failures++; $display("bad cell_done %0d", done_cell);
      end
      dones[int'(done_cell)] = 1;
      ndone++;
    end
  end

  initial begin
    int nexp;
    for (int c = 0; c < NCELL; c++) cnt[c] = int'($urandom % 21);
    cnt[4] = 0; cnt[13] = 17;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (all_done);
    repeat (3) @(posedge clk);
    // expected pairs
    nexp = 0;
    for (int h = 0; h < NCELL; h += NPIPE) begin
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
            int key;
            if (k == 0 && s <= r) continue;
            key = (h * 32 + r) * 1024 + nc * 32 + s;
            checks++;
            nexp++;
            if (!got.exists(key) || got[key] != 1) begin
              failures++;
              if (failures < 5) $display("pair %0d.%0d - %0d.%0d seen %0d", h, r, nc, s, got.exists(key) ? got[key] : 0);
            end
            if (got.exists(key)) got.delete(key);
          end
      end
    end
    checks++;
    if (got.size() != 0) begin failures++; $display("%0d unexpected pairs", got.size()); end
    checks++;
    if (ndone != 14) begin failures++; $display("cell_done count %0d", ndone); end
    checks++;
    if (nstall == 0) begin failures++; $display("stall never applied"); end
    $display("expected pairs %0d", nexp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

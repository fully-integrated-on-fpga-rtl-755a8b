// tb_scoreboard: all 343 cells are reported finished in a random order, up to
// three per cycle on random done lanes, while the consumer takes requests at a
// random rate.  Each released cell must have itself and all 26 periodic
// neighbours finished, no cell may be released twice, and every cell must be
// released by the end.
module tb_scoreboard;
  import md_pkg::*;
  localparam int NC = NCELL_X, NCELL = NC * NC * NC, ND = 41;
  logic clk = 0, rst_n = 0, start = 0;
  logic [ND-1:0] done_v = '0;
  logic [ND-1:0][CELL_W-1:0] done_cell = '0;
  logic req_valid, req_ready = 0;
  logic [CELL_W-1:0] req_cell;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  scoreboard #(.NCX(NC), .NCY(NC), .NCZ(NC), .NDONE(ND)) dut (.*);

  bit fin [NCELL];
  bit rel [NCELL];
  int nrel = 0;

  always @(posedge clk) if (rst_n && req_valid && req_ready) begin
    int c, x, y, z;
    bit ok;
    c = int'(req_cell);
    x = c / (NC * NC); y = (c / NC) % NC; z = c % NC;
    ok = 1;
    for (int dx = -1; dx <= 1; dx++)
      for (int dy = -1; dy <= 1; dy++)
        for (int dz = -1; dz <= 1; dz++)
          if (!fin[((x + dx + NC) % NC) * NC * NC + ((y + dy + NC) % NC) * NC + (z + dz + NC) % NC]) ok = 0;
    checks++;
    if (!ok || rel[c]) begin
      failures++;
      if (failures < 5) $display("cell %0d released early or twice", c);
    end
    rel[c] = 1;
    nrel++;
  end

  initial begin
    int order [NCELL];
    int k, tail;
    for (int i = 0; i < NCELL; i++) order[i] = i;
    for (int i = NCELL - 1; i > 0; i--) begin
      int j, t;
      j = int'($urandom % (i + 1)); t = order[i]; order[i] = order[j]; order[j] = t;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    k = 0;
    tail = 0;
    while (nrel < NCELL && tail < 3000) begin
      if (k == NCELL) tail++;
      @(negedge clk);
      done_v = '0;
      req_ready = ($urandom % 3) != 0;
      for (int n = 0; n < 3 && k < NCELL; n++) if ($urandom % 2) begin
        int lane;
        lane = int'($urandom % ND);
        if (!done_v[lane]) begin
          done_v[lane] = 1; done_cell[lane] = CELL_W'(order[k]);
          fin[order[k]] = 1;   // the release check sees it from the next edge on
          k++;
        end
      end
    end
    @(negedge clk) done_v = '0;
    checks++;
    if (nrel != NCELL) begin failures++; $display("released %0d of %0d", nrel, NCELL); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

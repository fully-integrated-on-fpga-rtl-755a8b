// tb_rl_force_cache: four sources send small integer forces (exact in fp32) to a
// few slots of one cell so that the same slot is often inside the adder.  After
// the cache is idle every slot is read and compared with the exact sum; the
// read must clear it.  The test fails if no hazard re-queue ever happened.
module tb_rl_force_cache;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int NSRC = 4, CAP = CELL_CAP;
  logic clk = 0, rst_n = 0;
  logic [NSRC-1:0] src_valid = '0, src_ready;
  logic [NSRC-1:0][SLOT_W-1:0] src_slot = '0;
  vec3f_t [NSRC-1:0] src_f = '0;
  logic rd_en = 0, idle, requeue;
  logic [SLOT_W-1:0] rd_slot = '0;
  vec3f_t rd_f;
  int checks = 0, failures = 0, nreq = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  rl_force_cache #(.NSRC(NSRC), .CAP(CAP)) dut (.*);

  real sx [CAP], sy [CAP], sz [CAP];
  int  left [NSRC];
  always @(posedge clk) if (rst_n && requeue) nreq++;

  // one process per source: offer, hold until accepted
  for (genvar s = 0; s < NSRC; s++) begin : g_src
    initial begin
      int a, b, c, sl;
      wait (rst_n);
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        sl = (i % 5 == 0) ? int'($urandom % CAP) : int'($urandom % 6);
        a = int'($urandom % 21) - 10; b = int'($urandom % 21) - 10; c = int'($urandom % 21) - 10;
        src_valid[s] = 1; src_slot[s] = SLOT_W'(sl);
        src_f[s] = '{r2f(real'(a)), r2f(real'(b)), r2f(real'(c))};
        sx[sl] += a; sy[sl] += b; sz[sl] += c;
        @(posedge clk);
        while (!src_ready[s]) @(posedge clk);
        @(negedge clk) src_valid[s] = 0;
        repeat ($urandom % 2) @(negedge clk);
      end
      left[s] = 1;
    end
  end

  initial begin
    for (int i = 0; i < CAP; i++) begin sx[i] = 0; sy[i] = 0; sz[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (left[0] && left[1] && left[2] && left[3]);
    repeat (5) @(posedge clk);
    wait (idle);
    for (int i = 0; i < CAP; i++) begin
      @(negedge clk) rd_en = 1; rd_slot = SLOT_W'(i); #1;
      checks++;
      if (f2r(rd_f.x) != sx[i] || f2r(rd_f.y) != sy[i] || f2r(rd_f.z) != sz[i]) begin
        failures++;
        if (failures < 5) $display("slot %0d got %f %f %f exp %f %f %f", i, f2r(rd_f.x), f2r(rd_f.y), f2r(rd_f.z), sx[i], sy[i], sz[i]);
      end
    end
    @(negedge clk) rd_en = 0; rd_slot = 0; #1;
    checks++;
    if (rd_f != '0) begin failures++; $display("slot not cleared"); end
    checks++;
    if (nreq == 0) begin failures++; $display("no re-queue seen"); end
    $display("re-queues: %0d", nreq);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

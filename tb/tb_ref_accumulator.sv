// tb_ref_accumulator: runs of 1..12 partial forces (small integers, exact in
// fp32), each run with a new reference id, one per cycle with occasional gaps,
// and a flush after some runs.  The outputs of each id are summed and compared
// with the exact total of its run; every run must produce output, and most
// runs exactly one.
module tb_ref_accumulator;
  import md_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, flush = 0, out_valid, busy;
  pid_t in_pid = '0, out_pid;
  vec3f_t in_f = '0, out_f;
  int checks = 0, failures = 0, nout = 0;
  always #5 clk = ~clk;
  initial begin #5000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  ref_accumulator dut (.*);

  real ex [int], ey [int], gx [int], gy [int];
  always @(posedge clk) if (rst_n && out_valid) begin
    int k;
    k = int'(out_pid);
    if (!gx.exists(k)) begin gx[k] = 0; gy[k] = 0; end
    gx[k] += f2r(out_f.x); gy[k] += f2r(out_f.y);
    nout++;
  end

  initial begin
    int nruns;
    nruns = 400;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < nruns; r++) begin
      int len;
      len = 1 + int'($urandom % 12);
      ex[r] = 0; ey[r] = 0;
      for (int i = 0; i < len; i++) begin
        int a, b;
        @(negedge clk);
        flush = 0;
        if ($urandom % 6 == 0) begin in_valid = 0; @(negedge clk); end
        a = int'($urandom % 17) - 8; b = int'($urandom % 5);
        in_valid = 1; in_pid = pid_t'(r);
        in_f = '{r2f(real'(a)), r2f(real'(b)), 32'h0};
        ex[r] += a; ey[r] += b;
      end
      if (r % 5 == 4) begin
        @(negedge clk) in_valid = 0; flush = 1;
      end
    end
    @(negedge clk) in_valid = 0; flush = 1;
    @(negedge clk) flush = 0;
    repeat (20) @(posedge clk);
    for (int r = 0; r < nruns; r++) begin
      checks++;
      if (!gx.exists(r) ? (ex[r] != 0 || ey[r] != 0) : (gx[r] != ex[r] || gy[r] != ey[r])) begin
        failures++;
        if (failures < 5) $display("pid %0d got %f %f exp %f %f", r, gx.exists(r) ? gx[r] : 0.0, gy.exists(r) ? gy[r] : 0.0, ex[r], ey[r]);
      end
    end
    checks++;
    if (busy || nout < nruns / 2) begin failures++; $display("busy %0b outputs %0d", busy, nout); end
    $display("outputs %0d for %0d runs", nout, nruns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

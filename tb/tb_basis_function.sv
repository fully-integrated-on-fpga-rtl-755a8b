// tb_basis_function: random x in [0,1) and random coefficients; the output,
// 5 cycles later, is compared with C3 x^3 + C2 x^2 + C1 x + C0 in real
// arithmetic, and the valid flag must follow the input valid flag.
module tb_basis_function;
  import md_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fp32_t x, c0, c1, c2, c3, y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  basis_function dut (.clk, .rst_n, .in_valid, .x, .c0, .c1, .c2, .c3, .out_valid, .y);

  real    exp_q [$];
  int     nout = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    real e;
    e = exp_q.pop_front();
    checks++;
    nout++;
    if (!near(f2r(y), e, 1e-4, 1e-5)) begin
      failures++;
      if (failures < 5) $display("y=%f exp=%f", f2r(y), e);
    end
  end

  initial begin
    real xr, a0, a1, a2, a3;
    x = '0; c0 = '0; c1 = '0; c2 = '0; c3 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      xr = urand01(); a0 = urand01() - 0.5; a1 = 2 * urand01() - 1; a2 = 2 * urand01() - 1;
      a3 = 2 * urand01() - 1;
      x = r2f(xr); c0 = r2f(a0); c1 = r2f(a1); c2 = r2f(a2); c3 = r2f(a3);
      if (in_valid) exp_q.push_back(((f2r(c3) * f2r(x) + f2r(c2)) * f2r(x) + f2r(c1)) * f2r(x) + f2r(c0));
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || nout < 1000) begin failures++; $display("outputs missing: left %0d", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_filter_arbiter: random valid masks; every grant must be one-hot, inside the
// mask, and equal to the next requesting filter after the previous grant
// (round robin, restarting from the lowest requester after the top filter or
// after an idle cycle).
module tb_filter_arbiter;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, enable = 0;
  logic [N-1:0] mask, grant;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #2000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  filter_arbiter #(.N(N)) dut (.clk, .rst_n, .enable, .valid_mask(mask), .grant);

  function automatic logic [N-1:0] lowest(input logic [N-1:0] m);
    return m & (~m + 1'b1);
  endfunction

  logic [N-1:0] cur, exp_g;
  int served [N];
  initial begin
    mask = '0; cur = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      mask = N'($urandom);
      if (i % 7 == 0) mask = 8'hff;
      enable = (i % 11) != 5;
      #1;
      if (cur == '0)                  exp_g = lowest(mask);
      else if (cur == N'(1) << (N-1)) exp_g = lowest(mask & ~cur);
      else                            exp_g = lowest(mask & ~((cur << 1) - 1'b1));
      if (!enable) exp_g = '0;
      checks++;
      if (grant !== exp_g) begin
        failures++;
        if (failures < 5) $display("t%0d mask=%b cur=%b grant=%b exp=%b", i, mask, cur, grant, exp_g);
      end
      for (int k = 0; k < N; k++) if (grant[k]) served[k]++;
      if (enable) cur = exp_g;
    end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (served[k] < 100) begin failures++; $display("filter %0d served %0d", k, served[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

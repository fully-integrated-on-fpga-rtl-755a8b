// tb_grid_memory: clears the grid, accumulates small integers into random
// addresses of every bank through the accumulate port (several times into the
// same address), reads them back through the access port, then writes complex
// values through the access port and reads them back, and clears again.
module tb_grid_memory;
  import md_pkg::*;
  import tb_util_pkg::*;
  localparam int G = 64, D = G * G * G / 16, AW = $clog2(D);
  logic clk = 0, rst_n = 0, clear = 0, clearing;
  logic [15:0] acc_en = '0, ax_we = '0;
  logic [15:0][AW-1:0] acc_addr = '0, ax_addr = '0;
  fp32_t [15:0] acc_val = '0, ax_rd_re, ax_rd_im, ax_wr_re = '0, ax_wr_im = '0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  initial begin #20000000; $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures + 1); $finish; end

  grid_memory #(.G(G)) dut (.*);

  logic [AW-1:0] addr [16][8];
  real           sum  [16][8];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (!clearing) begin failures++; $display("clear did not start"); end
    wait (!clearing);
    for (int b = 0; b < 16; b++)
      for (int k = 0; k < 8; k++) begin
        addr[b][k] = AW'(k * 1000 + ($urandom % 900));
        sum[b][k] = 0;
      end
    for (int it = 0; it < 64; it++) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) begin
        int k, v;
        k = int'($urandom % 8); v = int'($urandom % 9) - 4;
        acc_en[b] = ($urandom % 4) != 0;
        acc_addr[b] = addr[b][k];
        acc_val[b] = r2f(real'(v));
        if (acc_en[b]) sum[b][k] += v;
      end
    end
    @(negedge clk) acc_en = '0;
    for (int k = 0; k < 8; k++) begin
      for (int b = 0; b < 16; b++) ax_addr[b] = addr[b][k];
      #1;
      for (int b = 0; b < 16; b++) begin
        checks++;
        if (f2r(ax_rd_re[b]) != sum[b][k] || ax_rd_im[b] != '0) begin
          failures++;
          if (failures < 5) $display("bank %0d k %0d got %f exp %f", b, k, f2r(ax_rd_re[b]), sum[b][k]);
        end
      end
    end
    @(negedge clk);
    for (int b = 0; b < 16; b++) begin
      ax_we[b] = 1; ax_addr[b] = AW'(b * 17); ax_wr_re[b] = r2f(real'(b)); ax_wr_im[b] = r2f(real'(-b - 1));
    end
    @(negedge clk) ax_we = '0; #1;
    for (int b = 0; b < 16; b++) begin
      checks++;
      if (f2r(ax_rd_re[b]) != real'(b) || f2r(ax_rd_im[b]) != real'(-b - 1)) failures++;
    end
    clear = 1;
    @(negedge clk) clear = 0;
    wait (!clearing);
    #1;
    for (int b = 0; b < 16; b++) begin
      checks++;
      if (ax_rd_re[b] != '0 || ax_rd_im[b] != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

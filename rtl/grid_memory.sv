// grid_memory: the LR charge / potential grid, G x G x G complex fp32 points,
// stored in 16 interleaved banks.  Point (x,y,z) lives in bank (y%4)*4 + z%4 at
// address (x, y/4, z/4), so the 4x4 (y,z) footprint of a particle hits all 16
// banks once, and a run of 4 y or 4 z values (an FFT line) spreads over 4 banks.
// Each bank has one accumulate port (used by particle-to-grid mapping: the value
// is added to the real part, read-modify-write in one cycle) and one access port
// for the FFT / inverse FFT and the force calculation (combinational read, write
// of the full complex value).  `clear` starts zeroing the grid before a new LR step; it takes
// G^3/16 cycles, during which `clearing` is high and the ports are ignored.
// Bank count and the interleaving follow the 16-bank figure; the exact address
// function is this design's choice.
module grid_memory
  import md_pkg::*;
#(
  parameter int G = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  output logic                       clearing,
  // accumulate port, one lane per bank
  input  logic [15:0]                acc_en,
  input  logic [15:0][$clog2(G*G*G/16)-1:0] acc_addr,
  input  fp32_t [15:0]               acc_val,
  // access port, one lane per bank
  input  logic [15:0][$clog2(G*G*G/16)-1:0] ax_addr,
  output fp32_t [15:0]               ax_rd_re,
  output fp32_t [15:0]               ax_rd_im,
  input  logic [15:0]                ax_we,
  input  fp32_t [15:0]               ax_wr_re,
  input  fp32_t [15:0]               ax_wr_im
);
  localparam int D = G * G * G / 16;
  localparam int AW = $clog2(D);

  // clear walks the D addresses of all banks, one per cycle (clearing = busy)
  logic [AW:0] ccnt;
  always_ff @(posedge clk) begin
    if (!rst_n)                  ccnt <= '0;
    else if (clear && !clearing) ccnt <= (AW+1)'(D);
    else if (clearing)           ccnt <= ccnt - 1'b1;
  end
  assign clearing = (ccnt != '0);

  for (genvar b = 0; b < 16; b++) begin : g_bank
    fp32_t re [D];
    fp32_t im [D];
    always_ff @(posedge clk) begin
      if (clearing) begin
        re[AW'(ccnt - 1'b1)] <= FP_ZERO;
        im[AW'(ccnt - 1'b1)] <= FP_ZERO;
      end else begin
        if (acc_en[b]) re[acc_addr[b]] <= fp_add(re[acc_addr[b]], acc_val[b]);
        if (ax_we[b]) begin
          re[ax_addr[b]] <= ax_wr_re[b];
          im[ax_addr[b]] <= ax_wr_im[b];
        end
      end
    end
    assign ax_rd_re[b] = re[ax_addr[b]];
    assign ax_rd_im[b] = im[ax_addr[b]];
  end

  a_port_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (acc_en & ax_we) == '0);
endmodule

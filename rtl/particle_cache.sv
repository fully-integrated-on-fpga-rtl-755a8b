// particle_cache: the position and velocity cache of one cell (Mem 2: one memory
// per cell), double buffered.  Two copies, Mem 0 and Mem 1, hold positions (with
// gid and type) and velocities; `sel` picks the copy that force evaluation and
// motion update read, and its inverse the copy that receives updated particles.
// Motion update writes each updated particle into the other copy of the cell it
// now belongs to, at the next free slot, so particles that migrate between cells
// need no search for a free slot and leave no hole.  `swap` (end of a time step)
// flips sel and makes the written count the active count.
// Position and velocity share one address, as in the paper.
// Ports:
//   rd_en/rd_row -> rd_data: LANES particles of one row of the active copy, one
//                   cycle later (slot = row*LANES + lane), for the pair generators
//   mu_slot -> mu_p/mu_v: combinational read of one particle and its velocity
//   cp_row -> cp_data: combinational row read for the copy into the LR cache
//   wr_en/wr_p/wr_v: append to the inactive copy (wr_full when it has no room;
//                   the particle is then dropped and `overflow` is set)
//   ld_*: initial load into the active copy
module particle_cache
  import md_pkg::*;
#(
  parameter int CAP = CELL_CAP,
  parameter int N   = LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              swap,
  output logic [SLOT_W:0]   count,
  // RL read
  input  logic              rd_en,
  input  logic [SLOT_W-1:0] rd_row,
  output particle_t [N-1:0] rd_data,
  // summation / motion update read
  input  logic [SLOT_W-1:0] mu_slot,
  output particle_t         mu_p,
  output vec3f_t            mu_v,
  // copy to the LR position cache
  input  logic [SLOT_W-1:0] cp_row,
  output particle_t [N-1:0] cp_data,
  // motion update write into the inactive copy
  input  logic              wr_en,
  input  particle_t         wr_p,
  input  vec3f_t            wr_v,
  output logic              wr_full,
  output logic              overflow,
  // initial load
  input  logic              ld_en,
  input  logic [SLOT_W-1:0] ld_slot,
  input  particle_t         ld_p,
  input  vec3f_t            ld_v,
  input  logic              ld_count_en,
  input  logic [SLOT_W:0]   ld_count
);
  particle_t pmem [2][CAP];
  vec3f_t    vmem [2][CAP];
  logic      sel;
  logic [SLOT_W:0] wcount;

  assign wr_full = (wcount == (SLOT_W+1)'(CAP));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel <= 1'b0;
      count <= '0;
      wcount <= '0;
      overflow <= 1'b0;
    end else begin
      if (ld_count_en) count <= ld_count;
      if (wr_en) begin
        if (!wr_full) wcount <= wcount + 1'b1;
        else          overflow <= 1'b1;
      end
      if (swap) begin
        sel <= ~sel;
        count <= wcount;
        wcount <= '0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_en) begin
      pmem[sel][ld_slot] <= ld_p;
      vmem[sel][ld_slot] <= ld_v;
    end
    if (wr_en && !wr_full) begin
      pmem[~sel][wcount[SLOT_W-1:0]] <= wr_p;
      vmem[~sel][wcount[SLOT_W-1:0]] <= wr_v;
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int j = 0; j < N; j++)
        rd_data[j] <= pmem[sel][(int'(rd_row) * N + j) % CAP];
  end

  always_comb begin
    for (int j = 0; j < N; j++) cp_data[j] = pmem[sel][(int'(cp_row) * N + j) % CAP];
    mu_p = pmem[sel][mu_slot];
    mu_v = vmem[sel][mu_slot];
  end
endmodule

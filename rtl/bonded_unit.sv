// bonded_unit: bonded force evaluation with its own global memories.
//   Bonded Pair MEM     read-only list of bonds (pairs of gids, k, r0), loaded
//                       before the run through pl_*
//   Bonded Particle MEM positions addressed by the fixed global id (gid); motion
//                       update writes every updated position back (pm_*)
//   Bonded Force Cache  forces addressed by gid, accumulated here and read (and
//                       cleared) by the summation through rd_*
// The controller walks the pair memory sequentially, one bond per cycle, as the
// paper processes bondeds sequentially.  The pipeline evaluates the bond term
//   F_i = -2k (r - r0) e_ij,  F_j = -F_i,  e_ij = (r_i - r_j)/r
// in 6 steps: read pair, read both positions, periodic difference and r^2 in fixed
// point, square root, coefficient -2k(r-r0)/r in fp32, the two force vectors.
// Both forces are added into the force cache in the same cycle.
// Only the bond term is built: the angle and dihedral terms, which the paper
// merges into this pipeline with control registers and muxes, are not
// (their step-by-step datapath is not given in enough detail).
// start begins a pass over npairs bonds; done stays high when the pass is over.
module bonded_unit
  import md_pkg::*;
#(
  parameter int   NPART  = 23588,
  parameter int   NBOND  = 32768,
  parameter fix_t BOX    = BOX_FIX
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(NBOND+1)-1:0] npairs,
  output logic                      done,
  // pair memory load
  input  logic                      pl_we,
  input  logic [$clog2(NBOND)-1:0]  pl_addr,
  input  bond_t                     pl_data,
  // particle memory write (load and motion update)
  input  logic                      pm_we,
  input  logic [GID_W-1:0]          pm_gid,
  input  pos_t                      pm_pos,
  // force cache read and clear
  input  logic                      rd_en,
  input  logic [GID_W-1:0]          rd_gid,
  output vec3f_t                    rd_f
);
  localparam int BW = $clog2(NBOND);

  bond_t  pair_mem [NBOND];
  pos_t   part_mem [NPART];
  vec3f_t force_mem [NPART];

  always_ff @(posedge clk) begin
    if (pl_we) pair_mem[pl_addr] <= pl_data;
    if (pm_we) part_mem[pm_gid] <= pm_pos;
  end

  // ---- controller
  logic                    run;
  logic [$clog2(NBOND+1)-1:0] e;
  logic [5:0]              v;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0;
      e <= '0;
      v <= '0;
      done <= 1'b0;
    end else begin
      v <= {v[4:0], run && (e < npairs)};
      if (start) begin
        run <= 1'b1;
        e <= '0;
        done <= 1'b0;
      end else if (run) begin
        if (e < npairs) e <= e + 1'b1;
        else if (v == '0) begin
          run <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ---- pipeline
  bond_t  b1, b2, b3, b4, b5;
  pos_t   ri2, rj2;
  fix_t   dx3, dy3, dz3;
  logic [63:0] r2_3;
  fp32_t  r4;
  vec3f_t d4, d5, fi6;
  fp32_t  coef5;
  logic [GID_W-1:0] gi6, gj6;

  always_ff @(posedge clk) begin
    b1 <= pair_mem[BW'(e)];
    // 2: positions
    b2 <= b1;
    ri2 <= part_mem[b1.gi];
    rj2 <= part_mem[b1.gj];
    // 3: difference and r^2 (40 fraction bits)
    b3 <= b2;
    dx3 <= pbc_wrap(ri2.x - rj2.x, BOX);
    dy3 <= pbc_wrap(ri2.y - rj2.y, BOX);
    dz3 <= pbc_wrap(ri2.z - rj2.z, BOX);
    // 4: r (20 fraction bits) to fp32
    b4 <= b3;
    r4 <= fix2fp(64'(isqrt(r2_3)), POS_FRAC);
    d4 <= '{fix2fp(64'(dx3), POS_FRAC), fix2fp(64'(dy3), POS_FRAC), fix2fp(64'(dz3), POS_FRAC)};
    // 5: -2k(r - r0)/r
    b5 <= b4;
    coef5 <= fp_neg(fp_div(fp_mul(fp_mul(32'h4000_0000, b4.k), fp_sub(r4, b4.r0)), r4));
    d5 <= d4;
    // 6: force on i
    gi6 <= b5.gi;
    gj6 <= b5.gj;
    fi6 <= '{fp_mul(coef5, d5.x), fp_mul(coef5, d5.y), fp_mul(coef5, d5.z)};
  end

  always_comb begin
    r2_3 = 64'(dx3 * dx3) + 64'(dy3 * dy3) + 64'(dz3 * dz3);
  end

  // ---- force cache: accumulate F_i and -F_i; read-and-clear for summation
  // force words are a plain memory; fv marks gids holding a sum (cleared by
  // reset and by read-and-clear)
  logic [NPART-1:0] fv;
  vec3f_t fcur_i, fcur_j;
  assign fcur_i = fv[gi6] ? force_mem[gi6] : '0;
  assign fcur_j = fv[gj6] ? force_mem[gj6] : '0;
  always_ff @(posedge clk) begin
    if (v[5]) begin
      force_mem[gi6] <= '{fp_add(fcur_i.x, fi6.x), fp_add(fcur_i.y, fi6.y), fp_add(fcur_i.z, fi6.z)};
      force_mem[gj6] <= '{fp_sub(fcur_j.x, fi6.x), fp_sub(fcur_j.y, fi6.y), fp_sub(fcur_j.z, fi6.z)};
    end
  end
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int g = 0; g < NPART; g++) fv[g] <= 1'b0;
    end else begin
      if (v[5]) begin
        fv[gi6] <= 1'b1;
        fv[gj6] <= 1'b1;
      end
      if (rd_en) fv[rd_gid] <= 1'b0;
    end
  end
  assign rd_f = fv[rd_gid] ? force_mem[rd_gid] : '0;

  a_no_read_while_busy: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && v[5]));
endmodule

// rl_force_pipeline: range-limited force of one particle pair per cycle.
// Dataflow (one register per step, latency LAT = 9 cycles, one pair per cycle):
//   1  dx,dy,dz = ref - nbr, each wrapped by +-box length (periodic boundary)
//   2  r^2 = dx^2+dy^2+dz^2 in fixed point (24 fraction bits); dx,dy,dz to fp32
//   3  find the most significant 1 of r^2: its position selects the section
//      (each section twice as long as the one before), the next 8 bits the
//      interval inside it; a = r^2 with the bits below the interval cleared and
//      x-a the remainder.  The coefficient tables and the A/B/QQ table are read.
//   4  c1*(x-a)        5  r^-k = c1*(x-a) + c0, for k = 14, 8, 3
//   6  A*r^-14, B*r^-8, QQ*r^-3      7  A-term + B-term
//   8  F/r = sum + QQ-term, forced to 0 when r^2 >= rc^2
//   9  (Fx,Fy,Fz) = F/r * (dx,dy,dz): the force on the reference particle.
// First-order interpolation with 256 intervals per section follows the paper;
// the coefficient memories are loaded through tab_* (c0 = f(a), c1 = slope), the
// per-type-pair A, B, QQ through pc_*.  The exact rc^2 test in step 8 and the
// clamping of r^2 < 1 A^2 to the first section are this design's additions.
module rl_force_pipeline
  import md_pkg::*;
#(
  parameter fix_t              BOX  = BOX_FIX,
  parameter logic [R2_W-1:0]   RCSQ = RCSQ_FIX
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  pair_t                 in_pair,
  // coefficient table load: term 0/1/2 = r^-14/r^-8/r^-3, coef 0/1 = c0/c1
  input  logic                  tab_we,
  input  logic [1:0]            tab_term,
  input  logic                  tab_coef,
  input  logic [TAB_AW-1:0]     tab_addr,
  input  fp32_t                 tab_data,
  // type-pair parameter load: address {type_ref, type_nbr}
  input  logic                  pc_we,
  input  logic [2*TYPE_W-1:0]   pc_addr,
  input  vec3f_t                pc_data,   // x = A, y = B, z = QQ
  output logic                  out_valid,
  output pid_t                  out_ref_id,
  output pid_t                  out_nbr_id,
  output vec3f_t                out_f,
  output logic                  busy       // a pair is inside the pipeline
);
  localparam int LAT = 9;
  localparam int NT  = 1 << TAB_AW;

  fp32_t  c0_mem [3][NT];
  fp32_t  c1_mem [3][NT];
  vec3f_t pc_mem [1 << (2*TYPE_W)];

  always_ff @(posedge clk) begin
    if (tab_we && tab_term != 2'd3) begin
      if (tab_coef) c1_mem[tab_term][tab_addr] <= tab_data;
      else          c0_mem[tab_term][tab_addr] <= tab_data;
    end
    if (pc_we) pc_mem[pc_addr] <= pc_data;
  end

  // valid and ids travel along the whole pipeline
  logic [LAT-1:0] v;
  pid_t           rid [LAT];
  pid_t           nid [LAT];

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[LAT-2:0], in_valid};
    rid[0] <= in_pair.ref_id;
    nid[0] <= in_pair.nbr_id;
    for (int i = 1; i < LAT; i++) begin
      rid[i] <= rid[i-1];
      nid[i] <= nid[i-1];
    end
  end

  // ---- step 1
  fix_t dx1, dy1, dz1;
  logic [2*TYPE_W-1:0] tp1;
  always_ff @(posedge clk) begin
    dx1 <= pbc_wrap(in_pair.ref_p.pos.x - in_pair.nbr_p.pos.x, BOX);
    dy1 <= pbc_wrap(in_pair.ref_p.pos.y - in_pair.nbr_p.pos.y, BOX);
    dz1 <= pbc_wrap(in_pair.ref_p.pos.z - in_pair.nbr_p.pos.z, BOX);
    tp1 <= {in_pair.ref_p.ptype, in_pair.nbr_p.ptype};
  end

  // ---- step 2
  logic [R2_W-1:0]     r2_2;
  vec3f_t              d2;
  logic [2*TYPE_W-1:0] tp2;
  always_ff @(posedge clk) begin
    logic [2*POS_W+1:0] acc;
    acc = (2*POS_W+2)'(dx1 * dx1) + (2*POS_W+2)'(dy1 * dy1) + (2*POS_W+2)'(dz1 * dz1);
    acc = acc >> (2*POS_FRAC - R2_FRAC);
    r2_2 <= (acc > (2*POS_W+2)'({R2_W{1'b1}})) ? {R2_W{1'b1}} : R2_W'(acc);
    d2.x <= fix2fp(64'(dx1), POS_FRAC);
    d2.y <= fix2fp(64'(dy1), POS_FRAC);
    d2.z <= fix2fp(64'(dz1), POS_FRAC);
    tp2 <= tp1;
  end

  // ---- step 3: segment and interval
  logic [TAB_AW-1:0] idx;
  logic [R2_W-1:0]   off;
  always_comb begin
    logic [R2_W-1:0] x;
    int p;
    x = (r2_2 < R2_W'(1 << R2_FRAC)) ? R2_W'(1 << R2_FRAC) : r2_2;
    p = R2_FRAC;
    for (int i = R2_FRAC; i < R2_W; i++) if (x[i]) p = i;
    idx = {SEG_BITS'(p - R2_FRAC), BIN_BITS'(x >> (p - BIN_BITS))};
    off = x & ((R2_W'(1) << (p - BIN_BITS)) - R2_W'(1));
  end

  fp32_t  c0_3 [3];
  fp32_t  c1_3 [3];
  fp32_t  off3;
  vec3f_t pc3, d3;
  logic   inr3;
  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      c0_3[k] <= c0_mem[k][idx];
      c1_3[k] <= c1_mem[k][idx];
    end
    off3 <= fix2fp(64'(off), R2_FRAC);
    pc3  <= pc_mem[tp2];
    d3   <= d2;
    inr3 <= (r2_2 < RCSQ);
  end

  // ---- steps 4..9
  fp32_t  m4 [3];
  fp32_t  c0_4 [3];
  fp32_t  rk5 [3];
  vec3f_t pc4, pc5, d4, d5, d6, d7, d8;
  logic   inr4, inr5, inr6, inr7;
  fp32_t  t14_6, t8_6, t3_6, s7, t3_7, f8;
  vec3f_t f9;

  always_ff @(posedge clk) begin
    for (int k = 0; k < 3; k++) begin
      m4[k]   <= fp_mul(c1_3[k], off3);
      c0_4[k] <= c0_3[k];
      rk5[k]  <= fp_add(m4[k], c0_4[k]);
    end
    pc4 <= pc3;  pc5 <= pc4;
    d4 <= d3; d5 <= d4; d6 <= d5; d7 <= d6; d8 <= d7;
    inr4 <= inr3; inr5 <= inr4; inr6 <= inr5; inr7 <= inr6;
    t14_6 <= fp_mul(pc5.x, rk5[0]);
    t8_6  <= fp_mul(pc5.y, rk5[1]);
    t3_6  <= fp_mul(pc5.z, rk5[2]);
    s7    <= fp_add(t14_6, t8_6);
    t3_7  <= t3_6;
    f8    <= inr7 ? fp_add(s7, t3_7) : FP_ZERO;
    f9.x  <= fp_mul(f8, d8.x);
    f9.y  <= fp_mul(f8, d8.y);
    f9.z  <= fp_mul(f8, d8.z);
  end

  assign out_valid  = v[LAT-1];
  assign out_ref_id = rid[LAT-1];
  assign out_nbr_id = nid[LAT-1];
  assign out_f      = f9;
  assign busy       = |v;
endmodule

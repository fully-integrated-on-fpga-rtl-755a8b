// motion_update: integrates one particle per cycle and finds its new cell.
//   a  = F * (1/m)                 (multiplier)
//   v' = v + a * dt                (multiply-add)
//   r' = r + v' * dt               (multiply-add; v'*dt converted to fixed point)
// then the new position is compared with the lower and upper boundary of the
// particle's cell in each dimension (fixed-point comparators against the bound
// cache): inside, the cell index stays; below or above, it moves by one cell.
// This is the motion update pipeline of the paper (Verlet-style update with a
// 2 fs step).  This design's choices: 1/m comes from a per-type table loaded
// through im_*, dt is an fp32 input, positions leaving the box are wrapped back
// (periodic boundary), and the bound cache is computed from the box size
// (lower bound of cell i = i*BOX/NC).
// Latency 4 cycles, one particle per cycle.
module motion_update
  import md_pkg::*;
#(
  parameter int   NCX = NCELL_X,
  parameter int   NCY = NCELL_X,
  parameter int   NCZ = NCELL_X,
  parameter fix_t BOX = BOX_FIX
) (
  input  logic              clk,
  input  logic              rst_n,
  input  fp32_t             dt,
  input  logic              im_we,
  input  logic [TYPE_W-1:0] im_addr,
  input  fp32_t             im_data,
  input  logic              in_valid,
  input  particle_t         in_p,
  input  vec3f_t            in_v,
  input  vec3f_t            in_f,
  input  logic [CELL_W-1:0] in_cell,
  output logic              out_valid,
  output particle_t         out_p,
  output vec3f_t            out_v,
  output logic [CELL_W-1:0] out_cell,
  output logic              out_migrated
);
  fp32_t inv_mass [1 << TYPE_W];
  always_ff @(posedge clk) if (im_we) inv_mass[im_addr] <= im_data;

  function automatic fix_t lower(input int i, input int n);
    return fix_t'((64'(BOX) * 64'(i)) / 64'(n));
  endfunction

  // stage registers
  logic [3:0] v;
  particle_t p1, p2, p3;
  vec3f_t    a1, v1, v3, vn2;
  logic [CELL_W-1:0] c1, c2, c3;
  fp32_t dt1;

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    fp32_t im;
    im = inv_mass[in_p.ptype];
    // 1: acceleration
    a1  <= '{fp_mul(in_f.x, im), fp_mul(in_f.y, im), fp_mul(in_f.z, im)};
    v1  <= in_v;
    p1  <= in_p;
    c1  <= in_cell;
    dt1 <= dt;
    // 2: velocity
    vn2 <= '{fp_add(v1.x, fp_mul(a1.x, dt1)), fp_add(v1.y, fp_mul(a1.y, dt1)),
             fp_add(v1.z, fp_mul(a1.z, dt1))};
    p2  <= p1;
    c2  <= c1;
  end

  function automatic fix_t wrap_pos(input fix_t r);
    if (r < 0)    return r + BOX;
    if (r >= BOX) return r - BOX;
    return r;
  endfunction

  function automatic fix_t step(input fix_t r, input fp32_t vel, input fp32_t t);
    return wrap_pos(r + fix_t'(fp2fix(fp_mul(vel, t), POS_FRAC)));
  endfunction

  fp32_t dt2;
  always_ff @(posedge clk) begin
    dt2 <= dt1;
    // 3: position
    p3 <= p2;
    p3.pos.x <= step(p2.pos.x, vn2.x, dt2);
    p3.pos.y <= step(p2.pos.y, vn2.y, dt2);
    p3.pos.z <= step(p2.pos.z, vn2.z, dt2);
    v3 <= vn2;
    c3 <= c2;
  end

  // 4: target cell from the boundary comparison
  function automatic int move(input int c, input fix_t r, input int n);
    // a particle that crossed the box face was wrapped to the far side
    if (c == n - 1 && r < lower(1, n))  return 0;
    if (c == 0 && r >= lower(n - 1, n)) return n - 1;
    if (r < lower(c, n))      return (c + n - 1) % n;
    if (r >= lower(c + 1, n)) return (c + 1) % n;
    return c;
  endfunction

  always_ff @(posedge clk) begin
    int cx, cy, cz, nx, ny, nz;
    cx = int'(c3) / (NCY * NCZ);
    cy = (int'(c3) / NCZ) % NCY;
    cz = int'(c3) % NCZ;
    nx = move(cx, p3.pos.x, NCX);
    ny = move(cy, p3.pos.y, NCY);
    nz = move(cz, p3.pos.z, NCZ);
    out_p <= p3;
    out_v <= v3;
    out_cell <= CELL_W'(nx * NCY * NCZ + ny * NCZ + nz);
    out_migrated <= (nx != cx) || (ny != cy) || (nz != cz);
  end
  assign out_valid = v[3];
endmodule

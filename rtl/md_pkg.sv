// md_pkg: types, constants and arithmetic helpers shared by the MD engine.
//
// Number formats.  Positions are 28-bit signed fixed point with 20 fraction bits
// (Angstrom units, range +-128 A); the planar filter works on this format directly,
// as the filter described for this engine works on 28-bit fixed point.  Forces,
// velocities, table coefficients and all force arithmetic are IEEE-754 single
// precision (fp32).  The fp32 helpers below are this design's own simple
// implementation of the floating-point cores: normal numbers only (zero and
// denormals flush to zero), rounding by truncation, overflow saturates to the
// largest finite value, no NaN or infinity.
//
// Lint notes: the fp helpers compute wider intermediates than they return (the
// low product bits, the high shift bits), so some of their bits go unread.
//
// Geometry defaults follow the evaluated dataset: a 62.23 A cubic box with a 9 A
// cutoff.  The box is cut into 7x7x7 cells, which gives the ~70 particles per cell
// quoted for the 23,588-atom dataset; the 128-slot cell capacity and the
// 16-entry type table are this design's choices.
package md_pkg;

  // ---------------- sizes ----------------
  localparam int POS_W    = 28;            // fixed-point position width
  localparam int POS_FRAC = 20;            // fraction bits of a position
  localparam int GID_W    = 15;            // global particle id (23,588 < 32,768)
  localparam int TYPE_W   = 4;             // particle type index
  localparam int LANES    = 8;             // filters per force pipeline
  localparam int R2_W     = 32;            // fixed-point r^2 width
  localparam int R2_FRAC  = 24;            // fraction bits of r^2 (range 0..256 A^2)
  localparam int SEG_BITS = 3;             // 8 sections of the interpolation table
  localparam int BIN_BITS = 8;             // 256 intervals per section
  localparam int TAB_AW   = SEG_BITS + BIN_BITS;

  // ---------------- default geometry ----------------
  localparam real BOX_A   = 62.23;         // box edge (A)
  localparam real RC_A    = 9.0;           // cutoff radius (A)
  localparam int  NCELL_X = 7;             // cells per box edge
  localparam int  CELL_CAP = 128;          // particle slots per cell

  localparam logic signed [POS_W-1:0] BOX_FIX   = POS_W'($rtoi(BOX_A * 1048576.0));
  localparam logic signed [POS_W-1:0] RC_FIX    = POS_W'($rtoi(RC_A * 1048576.0));
  localparam logic signed [POS_W-1:0] RC2_FIX   = POS_W'($rtoi(RC_A * 1.41421356 * 1048576.0));
  localparam logic signed [POS_W-1:0] RC3_FIX   = POS_W'($rtoi(RC_A * 1.73205081 * 1048576.0));
  localparam logic        [R2_W-1:0]  RCSQ_FIX  = R2_W'($rtoi(RC_A * RC_A * 16777216.0));

  // ---------------- types ----------------
  typedef logic [31:0] fp32_t;
  typedef logic signed [POS_W-1:0] fix_t;

  typedef struct packed {
    fix_t x;
    fix_t y;
    fix_t z;
  } pos_t;

  typedef struct packed {
    fp32_t x;
    fp32_t y;
    fp32_t z;
  } vec3f_t;

  // One particle as stored in the position cache: position, global id, type.
  typedef struct packed {
    pos_t              pos;
    logic [GID_W-1:0]  gid;
    logic [TYPE_W-1:0] ptype;
  } particle_t;


  // Particle address inside the cell-organised caches: cell index and slot.
  localparam int CELL_W = 9;               // up to 512 cells
  localparam int SLOT_W = 7;               // up to 128 slots per cell
  typedef struct packed {
    logic [CELL_W-1:0] cidx;
    logic [SLOT_W-1:0] slot;
  } pid_t;

  // A candidate pair as it leaves the filter bank.
  typedef struct packed {
    particle_t ref_p;
    pid_t      ref_id;
    particle_t nbr_p;
    pid_t      nbr_id;
  } pair_t;

  // ---------------- N3L half shell ----------------
  // Offset k (0..13) of the cells a homecell is paired with: k=0 is the homecell,
  // k=1..13 the 13 neighbour cells that are "later" in (dx,dy,dz) lexicographic
  // order.  Each component is returned in 0..2 meaning -1..+1.
  function automatic logic [5:0] n3l_offset(input logic [3:0] k);
    logic [1:0] ox, oy, oz;
    int idx;
    if (k == 0) begin
      ox = 2'd1; oy = 2'd1; oz = 2'd1;
    end else begin
      // the 13 offsets above the centre of the 3x3x3 cube, centre index 13
      idx = 13 + int'(k);
      ox = 2'(idx / 9);
      oy = 2'((idx / 3) % 3);
      oz = 2'(idx % 3);
    end
    return {ox, oy, oz};
  endfunction

  // ---------------- fp32 helpers ----------------
  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_MAXF = 32'h7f7f_ffff;

  function automatic fp32_t fp_neg(input fp32_t a);
    return (a[30:23] == 8'd0) ? FP_ZERO : {~a[31], a[30:0]};
  endfunction

  function automatic fp32_t fp_mul(input fp32_t a, input fp32_t b);
    logic [47:0] prod;
    logic [22:0] man;
    int e;
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return FP_ZERO;
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (prod[47]) begin
      man = prod[46:24];
      e = e + 1;
    end else begin
      man = prod[45:23];
    end
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return {a[31] ^ b[31], FP_MAXF[30:0]};
    return {a[31] ^ b[31], 8'(e), man};
  endfunction

  function automatic fp32_t fp_add(input fp32_t a, input fp32_t b);
    fp32_t bg, sm;
    logic [26:0] mb, ms;
    logic [27:0] sum;
    int e, sh, lz;
    if (a[30:23] == 8'd0) return b[30:23] == 8'd0 ? FP_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin bg = a; sm = b; end
    else begin bg = b; sm = a; end
    e  = int'(bg[30:23]);
    sh = e - int'(sm[30:23]);
    mb = {1'b1, bg[22:0], 3'b000};
    ms = (sh > 26) ? 27'd0 : ({1'b1, sm[22:0], 3'b000} >> sh);
    if (bg[31] == sm[31]) begin
      sum = {1'b0, mb} + {1'b0, ms};
      if (sum[27]) begin
        sum = sum >> 1;
        e = e + 1;
      end
    end else begin
      sum = {1'b0, mb} - {1'b0, ms};
      if (sum == 28'd0) return FP_ZERO;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) break;
        lz++;
      end
      sum = sum << lz;
      e = e - lz;
    end
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return {bg[31], FP_MAXF[30:0]};
    return {bg[31], 8'(e), sum[25:3]};
  endfunction

  function automatic fp32_t fp_sub(input fp32_t a, input fp32_t b);
    return fp_add(a, fp_neg(b));
  endfunction

  // signed fixed point (FRAC fraction bits) to fp32
  function automatic fp32_t fix2fp(input logic signed [63:0] v, input int frac);
    logic [63:0] mag;
    logic [63:0] m;
    int p, e;
    if (v == 64'sd0) return FP_ZERO;
    mag = v[63] ? 64'(-v) : 64'(v);
    p = 0;
    for (int i = 0; i < 64; i++) if (mag[i]) p = i;
    m = (p >= 23) ? (mag >> (p - 23)) : (mag << (23 - p));
    e = p - frac + 127;
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return {v[63], FP_MAXF[30:0]};
    return {v[63], 8'(e), m[22:0]};
  endfunction

  // fp32 to signed fixed point with FRAC fraction bits (saturating at +-2^62)
  function automatic logic signed [63:0] fp2fix(input fp32_t a, input int frac);
    logic [63:0] m;
    int sh;
    if (a[30:23] == 8'd0) return 64'sd0;
    sh = int'(a[30:23]) - 150 + frac;
    m = {40'd0, 1'b1, a[22:0]};
    if (sh >= 39) m = 64'h3fff_ffff_ffff_ffff;
    else if (sh >= 0) m = m << sh;
    else if (sh > -64) m = m >> (-sh);
    else m = 64'd0;
    return a[31] ? -$signed(m) : $signed(m);
  endfunction

  // fp32 division a / b (b must be non-zero; a zero b gives the largest value)
  function automatic fp32_t fp_div(input fp32_t a, input fp32_t b);
    logic [47:0] q;
    logic [22:0] man;
    int e;
    if (a[30:23] == 8'd0) return FP_ZERO;
    if (b[30:23] == 8'd0) return {a[31] ^ b[31], FP_MAXF[30:0]};
    q = {1'b1, a[22:0], 24'd0} / {24'd0, 1'b1, b[22:0]};
    e = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[24]) begin
      man = q[23:1];
    end else begin
      man = q[22:0];
      e = e - 1;
    end
    if (e <= 0) return FP_ZERO;
    if (e >= 255) return {a[31] ^ b[31], FP_MAXF[30:0]};
    return {a[31] ^ b[31], 8'(e), man};
  endfunction

  // integer square root, bit by bit
  function automatic logic [31:0] isqrt(input logic [63:0] v);
    logic [31:0] r;
    logic [31:0] t;
    r = '0;
    for (int i = 31; i >= 0; i--) begin
      t = r | (32'd1 << i);
      if (64'(t) * 64'(t) <= v) r = t;
    end
    return r;
  endfunction

  // One entry of the bonded pair memory: a bond between two gids with its
  // spring constant k and equilibrium distance r0.
  typedef struct packed {
    logic [GID_W-1:0] gi;
    logic [GID_W-1:0] gj;
    fp32_t            k;
    fp32_t            r0;
  } bond_t;

  // periodic wrap of a coordinate difference into (-BOX/2, BOX/2]
  function automatic fix_t pbc_wrap(input fix_t d, input fix_t box);
    fix_t half;
    half = box >>> 1;
    if (d > half) return d - box;
    if (d < -half) return d + box;
    return d;
  endfunction

endpackage

// grid_mapping: particle-to-grid mapping of the LR unit.  For each particle it
// computes the grid coordinate u = r*G/BOX in each dimension, splits it into the
// grid index g and the offset oi in [0,1), evaluates the four basis functions
// phi_0..phi_3(oi) per dimension with 12 basis_function units (in parallel), and
// spreads the particle charge q over the 4x4x4 points g-1..g+2 around it:
// point (i,j,k) receives q * phi_i(x) * phi_j(y) * phi_k(z).  The 64 values go to
// the 16 grid-memory banks as 4 cycles of 16, one x plane per cycle, and are
// added there to what the grid point already holds.
// The basis coefficients (phi_f = C3 x^3 + C2 x^2 + C1 x + C0) are loaded through
// bc_*, so that the polynomials printed for the engine, or any other 4-point
// kernel, can be used.  Throughput: one particle every 4 cycles (in_ready);
// latency from acceptance to the first grid write: 7 cycles.
// The assignment of phi_0..phi_3 to points g-1..g+2 and the fixed-point scaling
// are this design's choices.
module grid_mapping
  import md_pkg::*;
#(
  parameter int   G   = 64,
  parameter fix_t BOX = BOX_FIX
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  pos_t        in_pos,
  input  fp32_t       in_q,
  // basis coefficient load: function f (0..3), power p (0..3)
  input  logic        bc_we,
  input  logic [1:0]  bc_fn,
  input  logic [1:0]  bc_pow,
  input  fp32_t       bc_data,
  // to grid memory
  output logic [15:0]                         acc_en,
  output logic [15:0][$clog2(G*G*G/16)-1:0]   acc_addr,
  output fp32_t [15:0]                        acc_val,
  output logic        busy
);
  localparam int GW = $clog2(G);
  localparam int AW = $clog2(G*G*G/16);
  // G/BOX with 20 fraction bits
  localparam logic [47:0] SCALE = 48'((longint'(G) << 40) / longint'(BOX));

  fp32_t coef [4][4];
  always_ff @(posedge clk) if (bc_we) coef[bc_fn][bc_pow] <= bc_data;

  logic [1:0] ph;
  always_ff @(posedge clk) begin
    if (!rst_n) ph <= '0;
    else        ph <= ph + 1'b1;
  end
  assign in_ready = (ph == 2'd0);

  // ---- stage 0: grid index and offset
  logic        v0;
  logic [GW-1:0] g0 [3];
  fp32_t       o0 [3];
  fp32_t       q0;
  always_ff @(posedge clk) begin
    fix_t r [3];
    logic [63:0] u;
    r[0] = in_pos.x; r[1] = in_pos.y; r[2] = in_pos.z;
    if (!rst_n) v0 <= 1'b0;
    else        v0 <= in_valid && in_ready;
    for (int d = 0; d < 3; d++) begin
      u = (64'(r[d]) * 64'(SCALE)) >> 20;       // 20 fraction bits
      g0[d] <= GW'(u >> 20);
      o0[d] <= fix2fp(64'(u & 64'hf_ffff), 20);
    end
    q0 <= in_q;
  end

  // ---- 12 basis units
  fp32_t w [3][4];
  logic  wv [3][4];
  for (genvar d = 0; d < 3; d++) begin : g_dim
    for (genvar f = 0; f < 4; f++) begin : g_fn
      basis_function u_bf (
        .clk, .rst_n, .in_valid(v0), .x(o0[d]),
        .c0(coef[f][0]), .c1(coef[f][1]), .c2(coef[f][2]), .c3(coef[f][3]),
        .out_valid(wv[d][f]), .y(w[d][f])
      );
    end
  end

  // index and charge travel alongside the basis units (5 cycles)
  logic [GW-1:0] gd [5][3];
  fp32_t         qd [5];
  always_ff @(posedge clk) begin
    gd[0] <= g0;
    qd[0] <= q0;
    for (int i = 1; i < 5; i++) begin
      gd[i] <= gd[i-1];
      qd[i] <= qd[i-1];
    end
  end

  // ---- expansion: 4 x-planes of 16 points
  logic        ex_v;
  logic [1:0]  t;
  fp32_t       ew [3][4];
  logic [GW-1:0] eg [3];
  fp32_t       eq;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ex_v <= 1'b0;
      t <= '0;
    end else if (wv[0][0]) begin
      ex_v <= 1'b1;
      t <= '0;
      ew <= w;
      eg <= gd[4];
      eq <= qd[4];
    end else if (ex_v) begin
      t <= t + 1'b1;
      if (t == 2'd3) ex_v <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    logic [GW-1:0] X, Y, Z;
    int a, b;
    fp32_t qx;
    qx = fp_mul(eq, ew[0][t]);
    X = eg[0] - GW'(1) + GW'(t);
    for (int L = 0; L < 16; L++) begin
      a = ((L / 4) - (int'(eg[1]) - 1) % 4 + 8) % 4;
      b = ((L % 4) - (int'(eg[2]) - 1) % 4 + 8) % 4;
      Y = eg[1] - GW'(1) + GW'(a);
      Z = eg[2] - GW'(1) + GW'(b);
      acc_en[L]   <= rst_n && ex_v;
      acc_addr[L] <= AW'({X, Y[GW-1:2], Z[GW-1:2]});
      acc_val[L]  <= fp_mul(fp_mul(qx, ew[1][a]), ew[2][b]);
    end
  end

  assign busy = v0 || ex_v || wv[0][0] || acc_en[0];
endmodule

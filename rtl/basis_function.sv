// basis_function: one instance of the particle-to-grid interpolation polynomial
//   X_o = C3*X^3 + C2*X^2 + C1*X + C0
// evaluated in 5 pipelined steps as drawn for this engine: X^2; X^3, C1*X and
// C2*X^2; C3*X^3 and C1*X + C2*X^2; C3*X^3 + C0; the final sum.  The four
// coefficients are inputs, so the same unit serves all four basis functions
// phi_0..phi_3 of a dimension (the engine uses 12 units: 4 functions x 3
// dimensions).  All values fp32; one evaluation per cycle, latency 5.
module basis_function
  import md_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t x,
  input  fp32_t c0,
  input  fp32_t c1,
  input  fp32_t c2,
  input  fp32_t c3,
  output logic  out_valid,
  output fp32_t y
);
  logic [4:0] v;
  fp32_t x1, x2_1, c0_1, c1_1, c2_1, c3_1;
  fp32_t x3_2, t1_2, t2_2, c0_2, c3_2;
  fp32_t t3_3, s12_3, c0_3;
  fp32_t s30_4, s12_4;

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[3:0], in_valid};
    // 1
    x1 <= x;  x2_1 <= fp_mul(x, x);
    c0_1 <= c0; c1_1 <= c1; c2_1 <= c2; c3_1 <= c3;
    // 2
    x3_2 <= fp_mul(x2_1, x1);
    t1_2 <= fp_mul(c1_1, x1);
    t2_2 <= fp_mul(c2_1, x2_1);
    c0_2 <= c0_1; c3_2 <= c3_1;
    // 3
    t3_3  <= fp_mul(c3_2, x3_2);
    s12_3 <= fp_add(t1_2, t2_2);
    c0_3  <= c0_2;
    // 4
    s30_4 <= fp_add(t3_3, c0_3);
    s12_4 <= s12_3;
    // 5
    y <= fp_add(s12_4, s30_4);
  end
  assign out_valid = v[4];
endmodule

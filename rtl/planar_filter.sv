// planar_filter: one particle-pair filter, the DSP-free "planar" variant.
// A pair passes when its periodic-wrapped coordinate differences satisfy
//   |x|,|y|,|z| < rc;  |x|+|y|, |x|+|z|, |y|+|z| < sqrt(2) rc;  |x|+|y|+|z| < sqrt(3) rc
// which are the plane tests of the paper's Filter v2; rc, sqrt(2)rc and sqrt(3)rc
// are constants.  The test works on 28-bit fixed-point positions, as the paper's
// filter does.  The plane tests bound a polyhedron that contains the cutoff
// sphere, so some pairs just outside rc pass; the force pipeline rejects those by
// its exact r^2 check.  The periodic wrap (with the box length) is this design's
// addition: the paper applies it in the force pipeline and is silent for the filter.
// Timing: registered, pass is valid one cycle after in_valid.
module planar_filter
  import md_pkg::*;
#(
  parameter fix_t BOX = BOX_FIX,
  parameter fix_t RC  = RC_FIX,
  parameter fix_t RC2 = RC2_FIX,
  parameter fix_t RC3 = RC3_FIX
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  pos_t ref_pos,
  input  pos_t nbr_pos,
  output logic pass
);
  fix_t ax, ay, az;
  logic ok;

  function automatic fix_t absw(input fix_t d);
    fix_t w;
    w = pbc_wrap(d, BOX);
    return w[POS_W-1] ? -w : w;
  endfunction

  always_comb begin
    ax = absw(ref_pos.x - nbr_pos.x);
    ay = absw(ref_pos.y - nbr_pos.y);
    az = absw(ref_pos.z - nbr_pos.z);
    ok = (ax < RC) && (ay < RC) && (az < RC)
      && ((ax + ay) < RC2) && ((ax + az) < RC2) && ((ay + az) < RC2)
      && ((ax + ay + az) < RC3);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) pass <= 1'b0;
    else        pass <= in_valid && ok;
  end
endmodule

// hdiff_lane: float32 datapath of one horizontal-diffusion output point.
//
// Inputs are the 13 plane values within Manhattan distance 2 of the point,
// named s_<row offset><column offset> with m = minus and p = plus, e.g.
// s_m1p1 is one row back and one column forward. It forms the five
// Laplacians lap = 4 s - (east + west + north + south), the four fluxes and
// out = s - c1 * ((fc - fcm) + (fr - frm)); a halo point (interior = 0) is
// copied unchanged. Purely combinational; hdiff_engine instantiates one per
// lane. Equations as described in hdiff_engine.
module hdiff_lane
  import fp32_pkg::*;
(
  input  logic interior,
  input  f32_t c1,
  input  f32_t s_00,
  input  f32_t s_0m1, s_0p1, s_0m2, s_0p2,   // same row, columns -1 +1 -2 +2
  input  f32_t s_m10, s_p10, s_m20, s_p20,   // same column, rows -1 +1 -2 +2
  input  f32_t s_m1m1, s_m1p1, s_p1m1, s_p1p1,
  output f32_t out
);
  // lap(centre, column+1, column-1, row+1, row-1)
  function automatic f32_t lap(input f32_t ctr, input f32_t e, input f32_t w,
                               input f32_t n, input f32_t s);
    return f32_sub(f32_mul(F32_FOUR, ctr), f32_add(f32_add(f32_add(e, w), n), s));
  endfunction

  f32_t l_c, l_cp, l_cm, l_rp, l_rm, fc, fcm, fr, frm;

  always_comb begin
    l_c  = lap(s_00,  s_0p1,  s_0m1,  s_p10,  s_m10);
    l_cp = lap(s_0p1, s_0p2,  s_00,   s_p1p1, s_m1p1);
    l_cm = lap(s_0m1, s_00,   s_0m2,  s_p1m1, s_m1m1);
    l_rp = lap(s_p10, s_p1p1, s_p1m1, s_p20,  s_00);
    l_rm = lap(s_m10, s_m1p1, s_m1m1, s_00,   s_m20);
    fc   = f32_sub(l_cp, l_c);
    fcm  = f32_sub(l_c, l_cm);
    fr   = f32_sub(l_rp, l_c);
    frm  = f32_sub(l_c, l_rm);
    out  = interior ? f32_sub(s_00, f32_mul(c1, f32_add(f32_sub(fc, fcm), f32_sub(fr, frm))))
                    : s_00;
  end
endmodule

// vadvc_lane: float32 datapath of one column of the vertical-advection
// Thomas solver, for one (level, group) step.
//
// Forward sweep:  m  = b (first level) or b - a*cp_prev
//                 cp = c / m,  dp = d / m (first level) or (d - a*dp_prev) / m
// Backward sweep: x  = dp_cur (top level) or dp_cur - cp_cur * x_next
// Purely combinational (no clock, no state); vadvc_engine instantiates one
// per lane and registers the results. The equations are the textbook Thomas
// algorithm; keeping a lane in its own module lets the same datapath be
// replicated LANES times.
module vadvc_lane
  import fp32_pkg::*;
(
  input  logic first,     // forward sweep at level 0
  input  logic top,       // backward sweep at the top level
  input  f32_t a, b, c, d,
  input  f32_t cp_prev, dp_prev,
  input  f32_t cp_cur, dp_cur, x_next,
  output f32_t cp, dp, x
);
  f32_t m;

  always_comb begin
    if (first) begin
      m  = b;
      dp = f32_div(d, m);
    end else begin
      m  = f32_sub(b, f32_mul(a, cp_prev));
      dp = f32_div(f32_sub(d, f32_mul(a, dp_prev)), m);
    end
    cp = f32_div(c, m);
    x  = top ? dp_cur : f32_sub(dp_cur, f32_mul(cp_cur, x_next));
  end
endmodule

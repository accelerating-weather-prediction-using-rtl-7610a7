// vadvc_engine: vertical-advection core, a Thomas-algorithm tridiagonal
// solver run down every column of a window.
//
// Vertical advection couples the points of a column through a tridiagonal
// system  a_k x_{k-1} + b_k x_k + c_k x_{k+1} = d_k  over the DEPTH vertical
// levels. The Thomas algorithm solves it in two sweeps:
//   forward  (k = 0 .. DEPTH-1):  m = b_k - a_k c'_{k-1}   (m = b_0 at k = 0)
//                                 c'_k = c_k / m
//                                 d'_k = (d_k - a_k d'_{k-1}) / m
//   backward (k = DEPTH-1 .. 0):  x_k = d'_k - c'_k x_{k+1}  (x = d' at the top)
// The forward sweep stores (c', d') of every level in an intermediate buffer;
// the backward sweep reads it back in reverse level order. The window has
// GROUPS column groups of LANES columns; each cycle one group at one level is
// processed with LANES float32 datapaths side by side, so the loop-carried
// dependency of a column is revisited only every GROUPS cycles.
// The forward/backward sweep split, the intermediate buffer between them and
// float32 data are the paper's. The exact sweep equations are the textbook
// Thomas algorithm: the paper does not print how COSMO forms a, b, c and d
// from its fields, so the engine takes the four coefficient fields as inputs.
// One group per cycle and no overlap of the two sweeps are this design's
// choices.
//
// Interface: four field streams (a, b, c, d) of LANES float32 each, all taken
// together when all are valid; x_* output stream, one line per (level, group)
// in backward order: level DEPTH-1 first, groups in order inside a level.
// Timing: forward sweep DEPTH*GROUPS cycles when inputs are ready, then the
// backward sweep DEPTH*GROUPS cycles when the output is ready; the next
// window's forward sweep starts after the last backward line is taken.
// Reset: synchronous, active low, back to the forward sweep at level 0.
module vadvc_engine #(
  parameter int unsigned LANES  = 32,
  parameter int unsigned GROUPS = 4,
  parameter int unsigned DEPTH  = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                f_valid [4],  // 0:a 1:b 2:c 3:d
  output logic                f_ready [4],
  input  logic [LANES*32-1:0] f_data  [4],
  output logic                x_valid,
  input  logic                x_ready,
  output logic [LANES*32-1:0] x_data,
  output logic                busy_bwd
);
  localparam int unsigned N  = GROUPS * DEPTH;
  localparam int unsigned AW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int unsigned KW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  // Intermediate buffer: c' and d' of every (level, group).
  logic [LANES*32-1:0] cp_mem [N];
  logic [LANES*32-1:0] dp_mem [N];
  // x of level k+1 for every group, used by the backward sweep.
  logic [LANES*32-1:0] x_next [GROUPS];

  logic          bwd;
  logic [KW-1:0] k;
  logic [GW-1:0] g;
  logic [AW-1:0] addr, addr_prev;
  logic          all_valid, fwd_fire, bwd_fire;

  logic [LANES*32-1:0] cp_new, dp_new, x_new;
  logic [LANES*32-1:0] cp_prev, dp_prev, cp_cur, dp_cur;

  assign addr      = AW'(k) * AW'(GROUPS) + AW'(g);
  assign addr_prev = addr - AW'(GROUPS);
  assign all_valid = f_valid[0] && f_valid[1] && f_valid[2] && f_valid[3];
  assign fwd_fire  = !bwd && all_valid;
  assign bwd_fire  = bwd && x_ready;
  assign busy_bwd  = bwd;

  for (genvar i = 0; i < 4; i++) begin : g_ready
    assign f_ready[i] = !bwd && all_valid;
  end

  assign cp_prev = cp_mem[addr_prev];
  assign dp_prev = dp_mem[addr_prev];
  assign cp_cur  = cp_mem[addr];
  assign dp_cur  = dp_mem[addr];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    vadvc_lane u_lane (
      .first  (k == '0),
      .top    (k == KW'(DEPTH - 1)),
      .a      (f_data[0][l*32 +: 32]),
      .b      (f_data[1][l*32 +: 32]),
      .c      (f_data[2][l*32 +: 32]),
      .d      (f_data[3][l*32 +: 32]),
      .cp_prev(cp_prev[l*32 +: 32]),
      .dp_prev(dp_prev[l*32 +: 32]),
      .cp_cur (cp_cur[l*32 +: 32]),
      .dp_cur (dp_cur[l*32 +: 32]),
      .x_next (x_next[g][l*32 +: 32]),
      .cp     (cp_new[l*32 +: 32]),
      .dp     (dp_new[l*32 +: 32]),
      .x      (x_new[l*32 +: 32])
    );
  end

  assign x_valid = bwd;
  assign x_data  = x_new;

  always_ff @(posedge clk) begin
    if (fwd_fire) begin
      cp_mem[addr] <= cp_new;
      dp_mem[addr] <= dp_new;
    end
    if (bwd_fire) x_next[g] <= x_new;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bwd <= 1'b0;
      k   <= '0;
      g   <= '0;
    end else if (fwd_fire || bwd_fire) begin
      if (g == GW'(GROUPS - 1)) begin
        g <= '0;
        if (!bwd) begin
          if (k == KW'(DEPTH - 1)) bwd <= 1'b1;     // stay at the top level
          else                     k <= k + KW'(1);
        end else begin
          if (k == '0) bwd <= 1'b0;                 // window done, k stays 0
          else         k <= k - KW'(1);
        end
      end else begin
        g <= g + GW'(1);
      end
    end
  end

endmodule

// hdiff_engine: horizontal-diffusion core, a compound Laplacian/flux stencil
// on one horizontal plane at a time.
//
// For every interior point (c, r) of a plane s the output is
//   lap(c,r) = 4 s(c,r) - (s(c+1,r) + s(c-1,r) + s(c,r+1) + s(c,r-1))
//   fc  = lap(c+1,r) - lap(c,r)      fcm = lap(c,r) - lap(c-1,r)
//   fr  = lap(c,r+1) - lap(c,r)      frm = lap(c,r) - lap(c,r-1)
//   out = s(c,r) - C1 * ((fc - fcm) + (fr - frm))
// which reads the 13 points within Manhattan distance 2 of (c, r). Points
// closer than 2 to the plane edge are the halo and are copied unchanged.
// Columns c run along a 1024-bit line (LANES float32), rows r are successive
// lines. The plane is first loaded into a fully partitioned register array so
// that the five rows a result row needs are all readable in the same cycle;
// then one output row of LANES points is produced per cycle.
// The Laplacian-then-flux structure, the flux and output equations and the
// float32 data follow the paper's pseudo-code (two evident index typos in it
// corrected as described in the design notes); the Laplacian weights, C1, the
// halo copy and the load-then-compute schedule are this design's choices.
//
// Interface: in_* stream of plane rows (row 0 first), out_* stream of result
// rows in the same order. Planes follow each other without a marker.
// Timing: ROWS cycles to load a plane, then ROWS cycles (when out_ready) to
// emit it; loading of the next plane starts after the last row is taken.
// Reset: synchronous, active low, returns to loading row 0.
module hdiff_engine
  import fp32_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned ROWS  = 64,
  parameter logic [31:0] C1    = 32'h3E80_0000  // 0.25
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [LANES*32-1:0] in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [LANES*32-1:0] out_data
);
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;

  f32_t          plane [ROWS][LANES];
  logic          computing;
  logic [RW-1:0] row;

  assign in_ready  = !computing;
  assign out_valid = computing;

  // Plane value with out-of-range reads returning zero (only used at halo
  // points, whose result is discarded).
  function automatic f32_t s_at(input int r, input int c);
    if (r < 0 || r >= int'(ROWS) || c < 0 || c >= int'(LANES)) return F32_ZERO;
    return plane[r][c];
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    hdiff_lane u_lane (
      .interior(l >= 2 && l < int'(LANES) - 2 && int'(row) >= 2 && int'(row) < int'(ROWS) - 2),
      .c1    (C1),
      .s_00  (s_at(int'(row), l)),
      .s_0m1 (s_at(int'(row), l - 1)),
      .s_0p1 (s_at(int'(row), l + 1)),
      .s_0m2 (s_at(int'(row), l - 2)),
      .s_0p2 (s_at(int'(row), l + 2)),
      .s_m10 (s_at(int'(row) - 1, l)),
      .s_p10 (s_at(int'(row) + 1, l)),
      .s_m20 (s_at(int'(row) - 2, l)),
      .s_p20 (s_at(int'(row) + 2, l)),
      .s_m1m1(s_at(int'(row) - 1, l - 1)),
      .s_m1p1(s_at(int'(row) - 1, l + 1)),
      .s_p1m1(s_at(int'(row) + 1, l - 1)),
      .s_p1p1(s_at(int'(row) + 1, l + 1)),
      .out   (out_data[l*32 +: 32])
    );
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int l = 0; l < int'(LANES); l++) plane[row][l] <= in_data[l*32 +: 32];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      computing <= 1'b0;
      row       <= '0;
    end else if ((in_valid && in_ready) || (out_valid && out_ready)) begin
      if (row == RW'(ROWS - 1)) begin
        row       <= '0;
        computing <= !computing;
      end else begin
        row <= row + RW'(1);
      end
    end
  end

endmodule

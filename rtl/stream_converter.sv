// stream_converter: width conversion between a 256-bit HBM pseudo-channel
// stream and a 1024-bit cache-line stream, in both directions.
//
// An HBM pseudo-channel port moves 256 bits per beat while the host link and
// the PEs work on 1024-bit cache lines, so every line crosses the HBM as four
// beats. The down path (toward HBM) splits a line into RATIO beats; the up
// path (from HBM) gathers RATIO beats into a line. The two widths and the
// need for conversion both ways are the paper's; the beat order (beat 0 holds
// bits [NARROW_W-1:0]) is this design's choice.
//
// Interface: dn_* wide in, narrow out; up_* narrow in, wide out; all
// valid/ready streams.
// Timing: down path: one narrow beat per cycle, the wide input is taken on
// the cycle its last beat leaves. Up path: one narrow beat per cycle; the
// assembled line is offered the cycle after its last beat arrives and a new
// line can be gathered while it waits only if it is taken in that cycle.
// Reset: synchronous, active low.
module stream_converter #(
  parameter int unsigned WIDE_W   = 1024,
  parameter int unsigned NARROW_W = 256
) (
  input  logic                clk,
  input  logic                rst_n,
  // 1024 -> 256 (toward HBM)
  input  logic                dn_in_valid,
  output logic                dn_in_ready,
  input  logic [WIDE_W-1:0]   dn_in_data,
  output logic                dn_out_valid,
  input  logic                dn_out_ready,
  output logic [NARROW_W-1:0] dn_out_data,
  // 256 -> 1024 (from HBM)
  input  logic                up_in_valid,
  output logic                up_in_ready,
  input  logic [NARROW_W-1:0] up_in_data,
  output logic                up_out_valid,
  input  logic                up_out_ready,
  output logic [WIDE_W-1:0]   up_out_data
);
  localparam int unsigned RATIO = WIDE_W / NARROW_W;
  localparam int unsigned CW    = (RATIO > 1) ? $clog2(RATIO) : 1;

  initial assert (WIDE_W % NARROW_W == 0) else $fatal(1, "stream_converter: widths do not divide");

  // ---------------- down path ----------------
  logic [CW-1:0] dn_beat;

  assign dn_out_valid = dn_in_valid;
  assign dn_out_data  = dn_in_data[dn_beat*NARROW_W +: NARROW_W];
  assign dn_in_ready  = dn_out_ready && (dn_beat == CW'(RATIO - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) dn_beat <= '0;
    else if (dn_out_valid && dn_out_ready)
      dn_beat <= (dn_beat == CW'(RATIO - 1)) ? '0 : dn_beat + CW'(1);
  end

  // ---------------- up path ----------------
  logic [CW-1:0]     up_beat;
  logic [WIDE_W-1:0] up_acc;
  logic              up_full;

  assign up_out_valid = up_full;
  assign up_out_data  = up_acc;
  assign up_in_ready  = !up_full || up_out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      up_beat <= '0;
      up_full <= 1'b0;
      up_acc  <= '0;
    end else begin
      if (up_full && up_out_ready) up_full <= 1'b0;
      if (up_in_valid && up_in_ready) begin
        up_acc[up_beat*NARROW_W +: NARROW_W] <= up_in_data;
        if (up_beat == CW'(RATIO - 1)) begin
          up_beat <= '0;
          up_full <= 1'b1;
        end else begin
          up_beat <= up_beat + CW'(1);
        end
      end
    end
  end

endmodule

// field_splitter: splits one window stream into one stream per weather field.
//
// A PE reads a single stream from its HBM pseudo-channel that carries every
// field the kernel needs. The window is stored level-major: for each vertical
// level, GROUPS cache lines of field 0, then GROUPS lines of field 1, and so
// on up to field NUM_FIELDS-1. The splitter counts lines, steers each to the
// FIFO of its field, and the engine then takes the same column group of all
// fields in one cycle. Splitting the single stream into per-field 1024-bit
// streams is the paper's; the level-major layout, the field count (the four
// inputs of a tridiagonal solve) and the FIFO depth are this design's choices.
//
// Interface: in_* valid/ready 1024-bit stream; out_valid/out_ready/out_data
// arrays indexed by field.
// Timing: one line per cycle; in_ready drops only when the target field's
// FIFO is full. A line reaches its field output one cycle after it is taken.
// Reset: synchronous, active low; the line counter restarts at field 0.
module field_splitter #(
  parameter int unsigned W          = 1024,
  parameter int unsigned NUM_FIELDS = 4,
  parameter int unsigned GROUPS     = 4,
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid [NUM_FIELDS],
  input  logic         out_ready [NUM_FIELDS],
  output logic [W-1:0] out_data  [NUM_FIELDS]
);
  localparam int unsigned FW = (NUM_FIELDS > 1) ? $clog2(NUM_FIELDS) : 1;
  localparam int unsigned GW = (GROUPS > 1) ? $clog2(GROUPS) : 1;

  logic [FW-1:0] field;
  logic [GW-1:0] group;
  logic          fifo_ready [NUM_FIELDS];

  assign in_ready = fifo_ready[field];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      field <= '0;
      group <= '0;
    end else if (in_valid && in_ready) begin
      if (group == GW'(GROUPS - 1)) begin
        group <= '0;
        field <= (field == FW'(NUM_FIELDS - 1)) ? '0 : field + FW'(1);
      end else begin
        group <= group + GW'(1);
      end
    end
  end

  for (genvar f = 0; f < NUM_FIELDS; f++) begin : g_field
    logic [$clog2(FIFO_DEPTH+1)-1:0] unused_count;
    cacheline_buffer #(.W(W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (in_valid && (field == FW'(f))),
      .in_ready (fifo_ready[f]),
      .in_data,
      .out_valid(out_valid[f]),
      .out_ready(out_ready[f]),
      .out_data (out_data[f]),
      .count    (unused_count)
    );
  end

endmodule

// pe: one processing element, the compute part of the accelerator that owns
// one HBM pseudo-channel.
//
// A PE turns the 1024-bit stream of one window into the 1024-bit stream of
// its results. For vertical advection (KERNEL_VADVC) the window stream is
// split into its four coefficient fields (field_splitter), solved column by
// column with the forward and backward sweeps (vadvc_engine), and reordered
// into window order by the output buffer and degridding stage
// (window_degrid). For horizontal diffusion (KERNEL_HDIFF) the window is a
// sequence of planes, each a single field, handled by hdiff_engine, whose
// results already leave in order. That both kernels share one PE structure
// with splitter, engine and degridding stages is the paper's; the kernel
// parameter selecting one of them per build is this design's choice (the
// paper builds a separate accelerator for each kernel).
//
// Interface: in_* and out_* valid/ready streams of LANES float32.
// Timing: vadvc: the results of a window leave after all its input has been
// taken and both sweeps have run (about 2*DEPTH*GROUPS cycles after the last
// input), then one line per cycle. hdiff: per plane, ROWS cycles of loading
// then ROWS cycles of output.
// Reset: synchronous, active low.
// The engine's busy_bwd status output is left unconnected: the PE needs no
// view of which sweep is running.
module pe
  import nero_pkg::*;
#(
  parameter kernel_e     KERNEL = KERNEL_VADVC,
  parameter int unsigned LANES  = 32,
  parameter int unsigned GROUPS = 4,   // vadvc: column groups per window
  parameter int unsigned DEPTH  = 64,  // vadvc: vertical levels
  parameter int unsigned ROWS   = 64,  // hdiff: rows per plane
  parameter logic [31:0] C1     = 32'h3E80_0000
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
  localparam int unsigned W = LANES * 32;

  if (KERNEL == KERNEL_VADVC) begin : g_vadvc
    logic         f_valid [4];
    logic         f_ready [4];
    logic [W-1:0] f_data  [4];
    logic         x_valid, x_ready, busy_bwd;
    logic [W-1:0] x_data;

    field_splitter #(.W(W), .NUM_FIELDS(4), .GROUPS(GROUPS), .FIFO_DEPTH(2 * GROUPS)) u_split (
      .clk, .rst_n, .in_valid, .in_ready, .in_data,
      .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data)
    );

    vadvc_engine #(.LANES(LANES), .GROUPS(GROUPS), .DEPTH(DEPTH)) u_engine (
      .clk, .rst_n, .f_valid, .f_ready, .f_data,
      .x_valid, .x_ready, .x_data, .busy_bwd
    );

    window_degrid #(.W(W), .GROUPS(GROUPS), .DEPTH(DEPTH), .REVERSE(1'b1)) u_degrid (
      .clk, .rst_n, .in_valid(x_valid), .in_ready(x_ready), .in_data(x_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_hdiff
    hdiff_engine #(.LANES(LANES), .ROWS(ROWS), .C1(C1)) u_engine (
      .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data
    );
  end

endmodule

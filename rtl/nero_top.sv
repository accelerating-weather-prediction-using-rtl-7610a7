// nero_top: the accelerator functional unit (AFU) of a near-HBM stencil
// accelerator for weather prediction: host cache-line buffers, job manager,
// stream scheduler and NUM_PE processing elements, each with its own HBM
// pseudo-channel.
//
// Data path: the host link's DMA delivers 1024-bit cache lines (32 float32)
// into a 64-line input buffer. The stream scheduler hands each window of a
// job to the next PE in turn. That PE's channel controller parks the window in
// the PE's own HBM pseudo-channel (256-bit AXI3), reads it back into the PE,
// writes the results to HBM and finally reads them back toward the host,
// unless the job selects the HBM bypass, in which case the window goes to the
// PE directly. Results pass through a 64-line output buffer to the host link.
// Control path: the host writes the job manager's registers to queue jobs and
// gets an interrupt (irq) when a job is complete.
// Outside this module are the parts the accelerator uses but does not
// implement: the host link endpoint and DMA (their streams and register bus
// are ports here) and the HBM stacks with their controllers (the NUM_PE
// hbm_req/hbm_rsp ports). KERNEL chooses the stencil every PE computes; the
// paper builds one accelerator per kernel, with 14 PEs for vertical advection
// and 16 for horizontal diffusion, the widths and buffer depth used here.
//
// Window sizes: vadvc: DEPTH levels x 4 fields x GROUPS lines in, DEPTH x
// GROUPS lines out; hdiff: PLANES planes of ROWS lines in and out.
// Reset: synchronous, active low, everything idle and empty.
// The buffer occupancies and the per-channel busy/phase signals are kept as
// named wires for debugging but are not brought out; they drive nothing.
module nero_top
  import nero_pkg::*;
#(
  parameter kernel_e     KERNEL    = KERNEL_VADVC,
  parameter int unsigned NUM_PE    = 14,
  parameter int unsigned GROUPS    = 4,
  parameter int unsigned DEPTH     = 64,
  parameter int unsigned ROWS      = 64,
  parameter int unsigned PLANES    = 8,
  parameter int unsigned BUF_DEPTH = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // register bus from the host link (AXI-Lite side)
  input  logic              mmio_wr,
  input  logic              mmio_rd,
  input  logic [2:0]        mmio_addr,
  input  logic [31:0]       mmio_wdata,
  output logic [31:0]       mmio_rdata,
  output logic              mmio_rvalid,
  output logic              irq,
  // cache-line streams from / to the host DMA
  input  logic              host_in_valid,
  output logic              host_in_ready,
  input  logic [LINE_W-1:0] host_in_data,
  output logic              host_out_valid,
  input  logic              host_out_ready,
  output logic [LINE_W-1:0] host_out_data,
  // one HBM pseudo-channel per PE
  output hbm_req_t          hbm_req [NUM_PE],
  input  hbm_rsp_t          hbm_rsp [NUM_PE],
  // status
  output logic [31:0]       pe_windows_done [NUM_PE]
);
  localparam int unsigned IN_LINES  = win_in_lines(KERNEL, DEPTH, 4, GROUPS, PLANES, ROWS);
  localparam int unsigned OUT_LINES = win_out_lines(KERNEL, DEPTH, GROUPS, PLANES, ROWS);

  // input / output cache-line buffers
  logic              ib_valid, ib_ready, ob_valid, ob_ready;
  logic [LINE_W-1:0] ib_data, ob_data;
  logic [$clog2(BUF_DEPTH+1)-1:0] ib_count, ob_count;

  cacheline_buffer #(.W(LINE_W), .DEPTH(BUF_DEPTH)) u_in_buf (
    .clk, .rst_n,
    .in_valid(host_in_valid), .in_ready(host_in_ready), .in_data(host_in_data),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data), .count(ib_count)
  );

  cacheline_buffer #(.W(LINE_W), .DEPTH(BUF_DEPTH)) u_out_buf (
    .clk, .rst_n,
    .in_valid(ob_valid), .in_ready(ob_ready), .in_data(ob_data),
    .out_valid(host_out_valid), .out_ready(host_out_ready), .out_data(host_out_data),
    .count(ob_count)
  );

  // control
  logic        job_start, job_done, sched_busy, bypass;
  logic [31:0] job_windows;

  job_manager #(.QUEUE_DEPTH(4)) u_jobs (
    .clk, .rst_n, .mmio_wr, .mmio_rd, .mmio_addr, .mmio_wdata, .mmio_rdata, .mmio_rvalid,
    .irq, .job_start, .job_windows, .bypass, .sched_busy, .job_done
  );

  // scheduler <-> channels
  logic              ch_in_valid  [NUM_PE];
  logic              ch_in_ready  [NUM_PE];
  logic [LINE_W-1:0] ch_in_data   [NUM_PE];
  logic              ch_out_valid [NUM_PE];
  logic              ch_out_ready [NUM_PE];
  logic [LINE_W-1:0] ch_out_data  [NUM_PE];

  stream_scheduler #(.W(LINE_W), .NUM_PE(NUM_PE), .IN_LINES(IN_LINES), .OUT_LINES(OUT_LINES)) u_sched (
    .clk, .rst_n, .job_start, .job_windows, .busy(sched_busy), .job_done,
    .in_valid(ib_valid), .in_ready(ib_ready), .in_data(ib_data),
    .out_valid(ob_valid), .out_ready(ob_ready), .out_data(ob_data),
    .pe_in_valid(ch_in_valid), .pe_in_ready(ch_in_ready), .pe_in_data(ch_in_data),
    .pe_out_valid(ch_out_valid), .pe_out_ready(ch_out_ready), .pe_out_data(ch_out_data)
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic              pin_valid, pin_ready, pout_valid, pout_ready, busy;
    logic [LINE_W-1:0] pin_data, pout_data;
    logic [1:0]        phase_id;

    hbm_channel_ctrl #(.IN_LINES(IN_LINES), .OUT_LINES(OUT_LINES)) u_chan (
      .clk, .rst_n, .bypass_req(bypass), .busy, .phase_id, .windows_done(pe_windows_done[p]),
      .host_in_valid(ch_in_valid[p]), .host_in_ready(ch_in_ready[p]), .host_in_data(ch_in_data[p]),
      .host_out_valid(ch_out_valid[p]), .host_out_ready(ch_out_ready[p]), .host_out_data(ch_out_data[p]),
      .pe_in_valid(pin_valid), .pe_in_ready(pin_ready), .pe_in_data(pin_data),
      .pe_out_valid(pout_valid), .pe_out_ready(pout_ready), .pe_out_data(pout_data),
      .hbm_req(hbm_req[p]), .hbm_rsp(hbm_rsp[p])
    );

    pe #(.KERNEL(KERNEL), .LANES(LINE_LANES), .GROUPS(GROUPS), .DEPTH(DEPTH), .ROWS(ROWS)) u_pe (
      .clk, .rst_n,
      .in_valid(pin_valid), .in_ready(pin_ready), .in_data(pin_data),
      .out_valid(pout_valid), .out_ready(pout_ready), .out_data(pout_data)
    );
  end

endmodule

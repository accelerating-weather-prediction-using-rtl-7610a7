// job_manager: the host's control interface to the accelerator: memory-mapped
// registers, a small queue of offloaded jobs, dispatch and completion
// interrupt.
//
// The host software offloads a kernel call as a job: it writes the number of
// windows and the mode (HBM or bypass), then writes CTRL.start, which puts the
// job in a QUEUE_DEPTH-entry queue. Whenever the stream scheduler is idle the
// oldest job is dispatched to it (job_start pulse) and its mode is held on
// bypass for the job's duration. When the scheduler reports completion, the
// done flag, and with it the interrupt line, is raised and the job counter
// increments; the host clears done by writing 1 to STATUS bit 1. Jobs queue
// up while one runs, so the host does not have to poll between them.
// That a job manager dispatches jobs to the streams, that jobs are queued
// with interrupts and that control goes through memory-mapped registers is
// the paper's; the register map below, the queue depth and the single-cycle
// register bus (standing in for AXI-Lite) are this design's choices.
//
// Register map (word address):
//   0 CTRL        W: bit0 = 1 enqueue a job with NUM_WINDOWS and MODE
//   1 STATUS      R: bit0 busy, bit1 done, bit2 queue full, bit3 queue empty
//                 W: bit1 = 1 clears done
//   2 NUM_WINDOWS R/W
//   3 MODE        R/W: bit0 bypass HBM
//   4 JOBS_DONE   R: jobs completed since reset
// Timing: mmio_rdata is valid the cycle after mmio_rd (mmio_rvalid).
// A job is dispatched at the earliest the cycle after it is enqueued.
// Reset: synchronous, active low: empty queue, registers zero.
module job_manager #(
  parameter int unsigned QUEUE_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mmio_wr,
  input  logic        mmio_rd,
  input  logic [2:0]  mmio_addr,
  input  logic [31:0] mmio_wdata,
  output logic [31:0] mmio_rdata,
  output logic        mmio_rvalid,
  output logic        irq,
  output logic        job_start,
  output logic [31:0] job_windows,
  output logic        bypass,
  input  logic        sched_busy,
  input  logic        job_done
);
  localparam int unsigned QW = (QUEUE_DEPTH > 1) ? $clog2(QUEUE_DEPTH) : 1;

  typedef struct packed {
    logic [31:0] windows;
    logic        bypass;
  } job_t;

  job_t              queue [QUEUE_DEPTH];
  logic [QW-1:0]     q_head, q_tail;
  logic [QW:0]       q_count;
  logic [31:0]       reg_windows, jobs_done;
  logic              reg_bypass, done_flag, running;
  logic              enq, deq, q_full, q_empty;

  assign q_full  = (q_count == (QW+1)'(QUEUE_DEPTH));
  assign q_empty = (q_count == '0);
  assign enq     = mmio_wr && (mmio_addr == 3'd0) && mmio_wdata[0] && !q_full;
  assign deq     = !q_empty && !sched_busy && !running;
  assign irq     = done_flag;

  function automatic logic [QW-1:0] qnext(input logic [QW-1:0] p);
    return (p == QW'(QUEUE_DEPTH - 1)) ? '0 : p + QW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (enq) queue[q_tail] <= '{windows: reg_windows, bypass: reg_bypass};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_head      <= '0;
      q_tail      <= '0;
      q_count     <= '0;
      reg_windows <= '0;
      reg_bypass  <= 1'b0;
      jobs_done   <= '0;
      done_flag   <= 1'b0;
      running     <= 1'b0;
      job_start   <= 1'b0;
      job_windows <= '0;
      bypass      <= 1'b0;
      mmio_rdata  <= '0;
      mmio_rvalid <= 1'b0;
    end else begin
      job_start <= 1'b0;
      // register writes
      if (mmio_wr) begin
        case (mmio_addr)
          3'd1: if (mmio_wdata[1]) done_flag <= 1'b0;
          3'd2: reg_windows <= mmio_wdata;
          3'd3: reg_bypass  <= mmio_wdata[0];
          default: ;
        endcase
      end
      // queue
      if (enq) q_tail <= qnext(q_tail);
      if (deq) begin
        q_head      <= qnext(q_head);
        job_start   <= 1'b1;
        job_windows <= queue[q_head].windows;
        bypass      <= queue[q_head].bypass;
        running     <= 1'b1;
      end
      case ({enq, deq})
        2'b10:   q_count <= q_count + 1'b1;
        2'b01:   q_count <= q_count - 1'b1;
        default: ;
      endcase
      // completion
      if (running && job_done) begin
        running   <= 1'b0;
        done_flag <= 1'b1;
        jobs_done <= jobs_done + 32'd1;
      end
      // register reads
      mmio_rvalid <= mmio_rd;
      if (mmio_rd) begin
        case (mmio_addr)
          3'd1:    mmio_rdata <= {28'd0, q_empty, q_full, done_flag, running};
          3'd2:    mmio_rdata <= reg_windows;
          3'd3:    mmio_rdata <= {31'd0, reg_bypass};
          3'd4:    mmio_rdata <= jobs_done;
          default: mmio_rdata <= '0;
        endcase
      end
    end
  end

endmodule

// hbm_axi_model: behavioural model of one HBM pseudo-channel as seen through
// the simplified AXI3 port of nero_pkg, for testbenches.
//
// A word-addressed memory of 256-bit beats. Write bursts: the address is
// accepted, the burst's beats are stored at consecutive addresses, and one
// write response follows the last beat after a short delay. Read bursts: the
// address is accepted and, after LATENCY cycles, the beats are returned one
// per cycle (with gaps when the accelerator is not ready). Ready signals are
// randomly withheld some of the time (STALL_PCT percent) to exercise
// backpressure. Counts of bursts are kept for the testbenches.
module hbm_axi_model
  import nero_pkg::*;
#(
  parameter int WORDS     = 16384,
  parameter int LATENCY   = 6,
  parameter int STALL_PCT = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  hbm_req_t req,
  output hbm_rsp_t rsp
);
  logic [HBM_W-1:0] mem [WORDS];

  int wr_bursts = 0, rd_bursts = 0;
  int aw_addr, aw_beats_left = 0, b_pending = 0, b_delay = 0;  // one write burst at a time
  int ar_addr, ar_beats_left = 0, ar_wait = 0;
  bit aw_busy = 0, ar_busy = 0;
  logic stall_w, stall_r;

  always_comb begin
    rsp.awready = rst_n && !aw_busy;
    rsp.wready  = rst_n && aw_busy && !stall_w;
    rsp.bvalid  = (b_pending > 0) && (b_delay == 0);
    rsp.arready = rst_n && !ar_busy;
    rsp.rvalid  = ar_busy && (ar_wait == 0) && !stall_r;
    rsp.rdata   = mem[ar_addr % WORDS];
    rsp.rlast   = (ar_beats_left == 1);
  end

  always @(posedge clk) begin
    stall_w <= ($urandom_range(99) < STALL_PCT);
    stall_r <= ($urandom_range(99) < STALL_PCT);
    if (!rst_n) begin
      aw_busy <= 0; ar_busy <= 0; b_pending <= 0; b_delay <= 0;
    end else begin
      // write address / data
      if (req.awvalid && rsp.awready) begin
        aw_busy <= 1;
        aw_addr <= int'(req.awaddr) / (HBM_W / 8);
        aw_beats_left <= int'(req.awlen) + 1;
        wr_bursts <= wr_bursts + 1;
      end
      if (req.wvalid && rsp.wready) begin
        mem[aw_addr % WORDS] <= req.wdata;
        aw_addr <= aw_addr + 1;
        aw_beats_left <= aw_beats_left - 1;
        if (aw_beats_left == 1) begin
          aw_busy <= 0;
          b_pending <= 1;
          b_delay <= 2;
          if (!req.wlast) $error("hbm_axi_model: wlast missing on the last beat");
        end else if (req.wlast) $error("hbm_axi_model: early wlast");
      end
      if (b_delay > 0) b_delay <= b_delay - 1;
      if (rsp.bvalid && req.bready) b_pending <= 0;
      // read address / data
      if (req.arvalid && rsp.arready) begin
        ar_busy <= 1;
        ar_addr <= int'(req.araddr) / (HBM_W / 8);
        ar_beats_left <= int'(req.arlen) + 1;
        ar_wait <= LATENCY;
        rd_bursts <= rd_bursts + 1;
      end
      if (ar_busy && ar_wait > 0) ar_wait <= ar_wait - 1;
      if (rsp.rvalid && req.rready) begin
        ar_addr <= ar_addr + 1;
        ar_beats_left <= ar_beats_left - 1;
        if (ar_beats_left == 1) ar_busy <= 0;
      end
    end
  end
endmodule

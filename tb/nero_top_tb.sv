// nero_top_tb: end-to-end test of the accelerator with two PEs and small
// vertical-advection windows (1 column group of 32 columns, 4 levels).
//
// The host side enqueues three jobs through the register bus (HBM mode,
// bypass mode, HBM mode) while the first one is already running, streams the
// input cache lines of all windows with random gaps, and takes the output
// lines with random backpressure. Every output line is compared with the
// float32 Thomas-solver reference. Each PE channel is backed by a behavioural
// HBM model with latency and random stalls.
// Mechanism counters, each of which must be non-zero: HBM write bursts, HBM
// read bursts, cycles in bypass mode, jobs queued while one is running,
// output backpressure cycles, windows finished by each PE, interrupt raised.
// The test also checks the JOBS_DONE register, the interrupt clear and the
// total runtime against a bound.
module nero_top_tb;
  import nero_pkg::*;
  import tb_nero_ref_pkg::*;
  localparam int NP = 2, G = 1, D = 4;
  localparam int JOBS = 3;
  localparam int WIN [JOBS] = '{5, 3, 2};
  localparam bit BYP [JOBS] = '{0, 1, 0};

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic        mmio_wr = 0, mmio_rd = 0, mmio_rvalid, irq;
  logic [2:0]  mmio_addr = 0;
  logic [31:0] mmio_wdata = 0, mmio_rdata;
  logic        host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 0;
  line_t       host_in_data = '0, host_out_data;
  hbm_req_t    hbm_req [NP];
  hbm_rsp_t    hbm_rsp [NP];
  logic [31:0] pe_windows_done [NP];

  nero_top #(.KERNEL(KERNEL_VADVC), .NUM_PE(NP), .GROUPS(G), .DEPTH(D), .BUF_DEPTH(8)) dut (.*);

  for (genvar p = 0; p < NP; p++) begin : g_hbm
    hbm_axi_model #(.WORDS(4096), .LATENCY(6), .STALL_PCT(10)) u_hbm (
      .clk, .rst_n, .req(hbm_req[p]), .rsp(hbm_rsp[p]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic reg_write(input int a, input int v);
    @(negedge clk); mmio_wr = 1; mmio_addr = 3'(a); mmio_wdata = v;
    @(negedge clk); mmio_wr = 0;
  endtask

  task automatic reg_read(input int a, output logic [31:0] v);
    @(negedge clk); mmio_rd = 1; mmio_addr = 3'(a);
    @(negedge clk); mmio_rd = 0;
    while (!mmio_rvalid) @(negedge clk);
    v = mmio_rdata;
  endtask

  line_t in_q [$], exp_q [$];
  int got = 0;
  // mechanism counters
  int n_bypass_cycles = 0, n_queued_busy = 0, n_backpressure = 0, n_irq = 0;

  always @(negedge clk) host_out_ready = ($urandom_range(3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (host_out_valid && host_out_ready) begin
      check(exp_q.size() > 0 && host_out_data == exp_q[0], $sformatf("output line %0d", got));
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      got++;
    end
    if (host_out_valid && !host_out_ready) n_backpressure++;
    if (dut.g_pe[0].phase_id == 2'd3) n_bypass_cycles++;
    if (irq) n_irq++;
  end

  logic [31:0] v;
  int expected_lines = 0, t0, t1;

  initial begin
    for (int j = 0; j < JOBS; j++)
      for (int w = 0; w < WIN[j]; w++) begin
        make_vadvc_window(G, D, in_q, exp_q);
        expected_lines += D * G;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = $time;
    fork
      begin
        for (int j = 0; j < JOBS; j++) begin
          reg_write(2, WIN[j]);
          reg_write(3, BYP[j]);
          reg_read(1, v);
          if (v[0]) n_queued_busy++;          // a job is already running
          reg_write(0, 1);
        end
      end
      begin
        foreach (in_q[i]) begin
          @(negedge clk);
          while ($urandom_range(4) == 0) @(negedge clk);
          host_in_valid = 1; host_in_data = in_q[i];
          @(posedge clk);
          while (!host_in_ready) @(posedge clk);
          #1 host_in_valid = 0;
        end
      end
    join
    wait (exp_q.size() == 0);
    do reg_read(4, v); while (v != JOBS && $time - t0 < 300000);
    t1 = $time;
    check(v == JOBS, $sformatf("JOBS_DONE = %0d", v));
    check(got == expected_lines, "output line count");
    check(irq, "interrupt raised after the last job");
    reg_write(1, 2);                         // clear done
    @(negedge clk);
    check(!irq, "interrupt cleared");
    reg_read(1, v);
    check(v[3] && !v[0], "queue empty and idle");
    // Every line crosses the channel at most a few times; with 2 PEs the
    // whole run must finish well inside a generous bound.
    check((t1 - t0) / 10 < 20 * in_q.size(), $sformatf("runtime %0d cycles", (t1 - t0) / 10));
    $display("mechanisms: hbm_wr_bursts=%0d/%0d hbm_rd_bursts=%0d/%0d bypass_cycles=%0d queued_busy=%0d backpressure=%0d pe_windows=%0d/%0d irq_cycles=%0d",
             g_hbm[0].u_hbm.wr_bursts, g_hbm[1].u_hbm.wr_bursts, g_hbm[0].u_hbm.rd_bursts, g_hbm[1].u_hbm.rd_bursts,
             n_bypass_cycles, n_queued_busy, n_backpressure, pe_windows_done[0], pe_windows_done[1], n_irq);
    check(g_hbm[0].u_hbm.wr_bursts > 0 && g_hbm[1].u_hbm.wr_bursts > 0, "HBM write bursts on both channels");
    check(g_hbm[0].u_hbm.rd_bursts > 0 && g_hbm[1].u_hbm.rd_bursts > 0, "HBM read bursts on both channels");
    check(n_bypass_cycles > 0, "bypass mode used");
    check(n_queued_busy > 0, "job queued while another ran");
    check(n_backpressure > 0, "output backpressure");
    check(pe_windows_done[0] > 0 && pe_windows_done[1] > 0, "both PEs finished windows");
    check(pe_windows_done[0] + pe_windows_done[1] == 10, "total windows");
    check(n_irq > 0, "interrupt seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// job_manager_tb: drives the register bus of the job manager with a fake
// scheduler. Checks that queued jobs are dispatched one at a time in order
// with their window count and mode, that a full queue refuses jobs, that
// STATUS, NUM_WINDOWS, MODE and JOBS_DONE read back correctly, that the
// interrupt rises on completion and is cleared by writing STATUS bit 1, and
// that the next job starts within 2 cycles of the previous one finishing.
module job_manager_tb;
  localparam int QD = 4;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic        mmio_wr = 0, mmio_rd = 0, mmio_rvalid, irq, job_start, bypass;
  logic [2:0]  mmio_addr = 0;
  logic [31:0] mmio_wdata = 0, mmio_rdata, job_windows;
  logic        sched_busy = 0, job_done = 0;

  job_manager #(.QUEUE_DEPTH(QD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic reg_write(input int a, input int v);
    @(negedge clk); mmio_wr = 1; mmio_addr = 3'(a); mmio_wdata = v;
    @(negedge clk); mmio_wr = 0;
  endtask

  task automatic reg_read(input int a, output logic [31:0] v);
    @(negedge clk); mmio_rd = 1; mmio_addr = 3'(a);
    @(negedge clk); mmio_rd = 0;
    check(mmio_rvalid, "read data valid one cycle after the read");
    v = mmio_rdata;
  endtask

  // fake scheduler: runs each job for 100 + windows cycles
  int started [$];
  bit started_byp [$];
  int last_done = -100, start_gap = 0;
  always @(posedge clk) if (rst_n && job_start) begin
    started.push_back(job_windows);
    started_byp.push_back(bypass);
    start_gap = $time / 10 - last_done;
    fork begin
      int n = job_windows;
      @(negedge clk) sched_busy = 1;
      repeat (100 + n) @(negedge clk);
      sched_busy = 0; job_done = 1;
      @(negedge clk) job_done = 0;
      last_done = $time / 10;
    end join_none
  end

  logic [31:0] v;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    reg_read(1, v);
    check(v == 32'h8, "STATUS after reset: idle, empty");
    reg_write(2, 7); reg_write(3, 1);
    reg_read(2, v); check(v == 7, "NUM_WINDOWS readback");
    reg_read(3, v); check(v == 1, "MODE readback");
    // enqueue 1 + QD jobs quickly: the first is dispatched, QD stay queued
    for (int j = 0; j < QD + 2; j++) begin
      reg_write(2, 3 + j); reg_write(3, j % 2); reg_write(0, 1);
    end
    reg_read(1, v);
    check(v[0] && v[2], "running and queue full");
    check(started.size() == 1, "one job running at a time");
    // wait for all accepted jobs
    repeat (1000) @(negedge clk);
    check(started.size() == QD + 1, $sformatf("jobs dispatched: %0d", started.size()));
    foreach (started[i]) begin
      check(started[i] == 3 + i, $sformatf("job %0d windows %0d", i, started[i]));
      check(started_byp[i] == i % 2, $sformatf("job %0d mode", i));
    end
    check(start_gap <= 2, $sformatf("next job started %0d cycles after done", start_gap));
    check(irq, "interrupt raised");
    reg_read(4, v); check(v == QD + 1, "JOBS_DONE");
    reg_read(1, v); check(v[1] && v[3] && !v[0], "STATUS done, empty, idle");
    reg_write(1, 2);
    check(!irq, "interrupt cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

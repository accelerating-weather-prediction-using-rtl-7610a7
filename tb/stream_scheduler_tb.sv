// stream_scheduler_tb: three fake PEs (each a FIFO that turns an IN-line
// window into OUT result lines, with random stalls) behind the scheduler.
// Runs two jobs with window counts that are not multiples of the PE count,
// checks that window w goes to PE w mod 3, that the output comes back in
// window order with the right content, that each job starts at PE 0, that job_done pulses once per job and
// that a job_start while busy is ignored.
module stream_scheduler_tb;
  localparam int W = 32, NP = 3, IN = 4, OUT = 2;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, misrouted = 0;

  logic         job_start = 0, busy, job_done;
  logic [31:0]  job_windows = 0;
  logic         in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = 0, out_data;
  logic         pe_in_valid [NP], pe_in_ready [NP], pe_out_valid [NP], pe_out_ready [NP];
  logic [W-1:0] pe_in_data [NP], pe_out_data [NP];

  stream_scheduler #(.W(W), .NUM_PE(NP), .IN_LINES(IN), .OUT_LINES(OUT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    check(misrouted == 0, $sformatf("%0d lines sent to the wrong PE", misrouted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // Input line = {window index in job, window, line}. A fake PE answers
  // window w with OUT lines {pe, w, k}: checks routing and order at the output.
  // Each job starts again at PE 0.
  for (genvar p = 0; p < NP; p++) begin : g_pe
    int cnt = 0, out_k = 0, wr_ptr = 0, rd_ptr = 0;
    int wins [64];
    always @(negedge clk) pe_in_ready[p] = ($urandom_range(3) != 0);
    always @(posedge clk) if (rst_n) begin
      if (pe_in_valid[p] && pe_in_ready[p]) begin
        if (int'(pe_in_data[p][31:24]) % NP != p) misrouted++;
        cnt = cnt + 1;
        if (cnt == IN) begin cnt = 0; wins[wr_ptr % 64] = int'(pe_in_data[p][23:16]); wr_ptr = wr_ptr + 1; end
      end
      if (pe_out_valid[p] && pe_out_ready[p]) begin
        out_k = out_k + 1;
        if (out_k == OUT) begin out_k = 0; rd_ptr = rd_ptr + 1; end
      end
    end
    always @(negedge clk) begin
      pe_out_valid[p] = (wr_ptr != rd_ptr) && ($urandom_range(4) != 0);
      pe_out_data[p]  = {8'(p), 8'(wins[rd_ptr % 64]), 16'(out_k)};
    end
  end

  always @(negedge clk) out_ready = ($urandom_range(3) != 0);

  int job_base = 0, exp_win = 0, exp_k = 0, dones = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(out_data == {8'((exp_win - job_base) % NP), 8'(exp_win), 16'(exp_k)},
            $sformatf("output %h expected window %0d line %0d", out_data, exp_win, exp_k));
      exp_k = exp_k + 1;
      if (exp_k == OUT) begin exp_k = 0; exp_win++; end
    end
    if (job_done) dones++;
  end

  task automatic run_job(input int first_win, input int n);
    job_base = first_win;
    @(negedge clk); job_start = 1; job_windows = n;
    @(negedge clk); job_start = 0;
    check(busy, "busy after job_start");
    // a second start while busy must be ignored
    job_start = 1; job_windows = 99;
    @(negedge clk); job_start = 0;
    for (int w = first_win; w < first_win + n; w++)
      for (int l = 0; l < IN; l++) begin
        while ($urandom_range(4) == 0) @(negedge clk);
        in_valid = 1; in_data = {8'(w - first_win), 8'(w), 16'(l)};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        #1 in_valid = 0;
        @(negedge clk);
      end
    wait (!busy);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_job(0, 7);
    repeat (3) @(posedge clk);
    check(dones == 1 && exp_win == 7, "first job complete");
    run_job(7, 5);
    repeat (3) @(posedge clk);
    check(dones == 2 && exp_win == 12, $sformatf("second job complete: done pulses %0d, windows %0d", dones, exp_win));
    check(misrouted == 0, $sformatf("%0d lines sent to the wrong PE", misrouted));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

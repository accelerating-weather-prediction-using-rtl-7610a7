// hbm_channel_ctrl_tb: one channel controller with a behavioural HBM
// pseudo-channel (latency, random stalls) and a fake PE. The fake PE takes
// IN lines and answers with OUT lines, result k = input k XOR input k+OUT,
// so wrong, lost or reordered lines through HBM are detected.
// Runs HBM-mode and bypass-mode windows interleaved with random host gaps and
// backpressure; checks every output line, the HBM burst counts per window
// (none in bypass mode), the phase order, windows_done, and that the write-in
// phase takes at least four cycles per line (256-bit channel, 1024-bit line).
module hbm_channel_ctrl_tb;
  import nero_pkg::*;
  localparam int IN = 8, OUT = 4;
  localparam int NWIN = 6;
  localparam bit BYP [NWIN] = '{0, 1, 0, 0, 1, 0};

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic bypass_req = 0, busy;
  logic [1:0] phase_id;
  logic [31:0] windows_done;
  logic host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 0;
  logic pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
  logic [LINE_W-1:0] host_in_data = '0, host_out_data, pe_in_data, pe_out_data;
  hbm_req_t hbm_req;
  hbm_rsp_t hbm_rsp;

  hbm_channel_ctrl #(.IN_LINES(IN), .OUT_LINES(OUT)) dut (.*);
  hbm_axi_model #(.WORDS(1024), .LATENCY(6), .STALL_PCT(15)) u_hbm (
    .clk, .rst_n, .req(hbm_req), .rsp(hbm_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // fake PE
  logic [LINE_W-1:0] pe_buf [IN];
  int pe_cnt = 0, pe_out_k = 0;
  logic pe_emitting = 0;
  assign pe_in_ready  = !pe_emitting;
  assign pe_out_valid = pe_emitting;
  assign pe_out_data  = pe_buf[pe_out_k] ^ pe_buf[pe_out_k + OUT];
  always @(posedge clk) begin
    if (pe_in_valid && pe_in_ready) begin
      pe_buf[pe_cnt] <= pe_in_data;
      if (pe_cnt == IN - 1) begin pe_cnt <= 0; pe_emitting <= 1; end
      else pe_cnt <= pe_cnt + 1;
    end
    if (pe_out_valid && pe_out_ready) begin
      if (pe_out_k == OUT - 1) begin pe_out_k <= 0; pe_emitting <= 0; end
      else pe_out_k <= pe_out_k + 1;
    end
  end

  always @(negedge clk) host_out_ready = ($urandom_range(3) != 0);

  logic [LINE_W-1:0] exp_q [$];
  int got = 0;
  always @(posedge clk) if (rst_n && host_out_valid && host_out_ready) begin
    check(exp_q.size() > 0 && host_out_data == exp_q[0], $sformatf("output line %0d", got));
    if (exp_q.size() > 0) void'(exp_q.pop_front());
    got++;
  end

  // phase trace
  logic [1:0] last_phase = 0;
  int phase_errors = 0, writein_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (phase_id != last_phase) begin
      case (last_phase)
        2'd0: if (!(phase_id inside {2'd1, 2'd3})) phase_errors++;
        2'd1: if (phase_id != 2'd2) phase_errors++;
        2'd2: if (phase_id != 2'd0) phase_errors++;
        2'd3: if (phase_id != 2'd0) phase_errors++;
      endcase
    end
    if (busy && phase_id == 2'd0) writein_cycles++;
    last_phase <= phase_id;
  end

  initial begin
    logic [LINE_W-1:0] win [IN];
    int wb0, rb0, wc0, t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < NWIN; w++) begin
      for (int i = 0; i < IN; i++)
        for (int j = 0; j < LINE_W / 32; j++) win[i][j*32 +: 32] = $urandom;
      for (int k = 0; k < OUT; k++) exp_q.push_back(win[k] ^ win[k + OUT]);
      wb0 = u_hbm.wr_bursts; rb0 = u_hbm.rd_bursts; wc0 = writein_cycles;
      bypass_req = BYP[w];
      for (int i = 0; i < IN; i++) begin
        @(negedge clk);
        while ($urandom_range(4) == 0) @(negedge clk);
        host_in_valid = 1; host_in_data = win[i];
        @(posedge clk);
        while (!host_in_ready) @(posedge clk);
        #1 host_in_valid = 0;
      end
      wait (exp_q.size() == 0);
      @(posedge clk);
      wait (!busy);
      repeat (2) @(posedge clk);
      if (BYP[w]) begin
        check(u_hbm.wr_bursts == wb0 && u_hbm.rd_bursts == rb0, "no HBM traffic in bypass mode");
      end else begin
        check(u_hbm.wr_bursts - wb0 == (IN + OUT) * 4 / 16, $sformatf("write bursts %0d", u_hbm.wr_bursts - wb0));
        check(u_hbm.rd_bursts - rb0 == (IN + OUT) * 4 / 16, $sformatf("read bursts %0d", u_hbm.rd_bursts - rb0));
        check(writein_cycles - wc0 >= IN * 4, $sformatf("write-in %0d cycles", writein_cycles - wc0));
      end
    end
    check(windows_done == NWIN, "windows_done");
    check(got == NWIN * OUT, "output line count");
    check(phase_errors == 0, "phase order");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// hbm_bypass_switch_tb: drives random valid/ready/data and gate values into
// the switch and compares every output each cycle with an independent
// routing table for bypass mode and the four HBM-mode routings. Also checks
// that the mode only changes on load, and that reset selects HBM mode.
module hbm_bypass_switch_tb;
  localparam int W = 16;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic load = 0, bypass_req = 0, bypass, wr_src_pe = 0, rd_dst_pe = 0;
  logic host_in_valid = 0, host_in_ready, host_out_valid, host_out_ready = 0;
  logic pe_in_valid, pe_in_ready = 0, pe_out_valid = 0, pe_out_ready;
  logic wr_valid, wr_ready = 0, rd_valid = 0, rd_ready;
  logic en_host_in = 0, en_pe_in = 0, en_pe_out = 0, en_host_out = 0;
  logic [W-1:0] host_in_data = 0, host_out_data, pe_in_data, pe_out_data = 0, wr_data, rd_data = 0;

  hbm_bypass_switch #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // expected handshake signals (data is checked only where valid is set)
  task automatic compare();
    logic e_hir, e_hov, e_piv, e_por, e_wv, e_rr;
    logic hi, pi, po, ho;
    hi = en_host_in; pi = en_pe_in; po = en_pe_out; ho = en_host_out;
    if (bypass) begin
      e_piv = host_in_valid & hi & pi;  e_hir = pe_in_ready & hi & pi;
      e_hov = pe_out_valid & po & ho;   e_por = host_out_ready & po & ho;
      e_wv = 0; e_rr = 0;
    end else begin
      e_wv  = wr_src_pe ? (pe_out_valid & po) : (host_in_valid & hi);
      e_por = wr_src_pe ? (wr_ready & po) : 1'b0;
      e_hir = wr_src_pe ? 1'b0 : (wr_ready & hi);
      e_piv = rd_dst_pe ? (rd_valid & pi) : 1'b0;
      e_hov = rd_dst_pe ? 1'b0 : (rd_valid & ho);
      e_rr  = rd_dst_pe ? (pe_in_ready & pi) : (host_out_ready & ho);
    end
    check({host_in_ready, host_out_valid, pe_in_valid, pe_out_ready, wr_valid, rd_ready} ==
          {e_hir, e_hov, e_piv, e_por, e_wv, e_rr}, "handshake routing");
    if (pe_in_valid)    check(pe_in_data == (bypass ? host_in_data : rd_data), "pe_in data");
    if (host_out_valid) check(host_out_data == (bypass ? pe_out_data : rd_data), "host_out data");
    if (wr_valid)       check(wr_data == (wr_src_pe ? pe_out_data : host_in_data), "wr data");
  endtask

  int n_byp = 0, n_hbm = 0;
  logic prev_bypass;
  initial begin
    repeat (3) @(posedge clk);
    #1 check(bypass == 0, "HBM mode after reset");
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      prev_bypass = bypass;
      {host_in_valid, host_out_ready, pe_in_ready, pe_out_valid, wr_ready, rd_valid} = 6'($urandom);
      {en_host_in, en_pe_in, en_pe_out, en_host_out, wr_src_pe, rd_dst_pe} = 6'($urandom);
      host_in_data = W'($urandom); pe_out_data = W'($urandom); rd_data = W'($urandom);
      bypass_req = $urandom_range(1);
      load = ($urandom_range(7) == 0);
      #1 compare();
      if (bypass) n_byp++; else n_hbm++;
      @(posedge clk); #1;
      check(bypass == (load ? bypass_req : prev_bypass), "mode changes only on load");
    end
    check(n_byp > 1000 && n_hbm > 1000, "both modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

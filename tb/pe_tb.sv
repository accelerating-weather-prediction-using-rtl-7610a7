// pe_tb: runs whole windows through a vertical-advection PE and a
// horizontal-diffusion PE (small windows) with random input gaps and output
// backpressure, and compares every result line with the reference solution.
module pe_tb;
  import nero_pkg::*;
  import tb_nero_ref_pkg::*;
  localparam int G = 2, D = 8, R = 8, WINDOWS = 2;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic v_in_valid = 0, v_in_ready, v_out_valid, v_out_ready = 0;
  logic h_in_valid = 0, h_in_ready, h_out_valid, h_out_ready = 0;
  line_t v_in_data = '0, v_out_data, h_in_data = '0, h_out_data;

  pe #(.KERNEL(KERNEL_VADVC), .LANES(32), .GROUPS(G), .DEPTH(D), .ROWS(R)) dut_v (
    .clk, .rst_n, .in_valid(v_in_valid), .in_ready(v_in_ready), .in_data(v_in_data),
    .out_valid(v_out_valid), .out_ready(v_out_ready), .out_data(v_out_data));
  pe #(.KERNEL(KERNEL_HDIFF), .LANES(32), .GROUPS(G), .DEPTH(D), .ROWS(R)) dut_h (
    .clk, .rst_n, .in_valid(h_in_valid), .in_ready(h_in_ready), .in_data(h_in_data),
    .out_valid(h_out_valid), .out_ready(h_out_ready), .out_data(h_out_data));

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

  line_t v_in [$], v_exp [$], h_in [$], h_exp [$];
  int v_got = 0, h_got = 0;

  always @(negedge clk) begin
    v_out_ready = ($urandom_range(3) != 0);
    h_out_ready = ($urandom_range(3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (v_out_valid && v_out_ready) begin
      check(v_exp.size() > 0 && v_out_data == v_exp[0], $sformatf("vadvc line %0d", v_got));
      if (v_exp.size() > 0) void'(v_exp.pop_front());
      v_got++;
    end
    if (h_out_valid && h_out_ready) begin
      check(h_exp.size() > 0 && h_out_data == h_exp[0], $sformatf("hdiff line %0d", h_got));
      if (h_exp.size() > 0) void'(h_exp.pop_front());
      h_got++;
    end
  end

  initial begin
    for (int w = 0; w < WINDOWS; w++) begin
      make_vadvc_window(G, D, v_in, v_exp);
      make_hdiff_window(R, 2, 32'h3E80_0000, h_in, h_exp);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
        foreach (v_in[i]) begin
          @(negedge clk);
          while ($urandom_range(4) == 0) @(negedge clk);
          v_in_valid = 1; v_in_data = v_in[i];
          @(posedge clk);
          while (!v_in_ready) @(posedge clk);
          #1 v_in_valid = 0;
        end
      end
      begin
        foreach (h_in[i]) begin
          @(negedge clk);
          while ($urandom_range(4) == 0) @(negedge clk);
          h_in_valid = 1; h_in_data = h_in[i];
          @(posedge clk);
          while (!h_in_ready) @(posedge clk);
          #1 h_in_valid = 0;
        end
      end
    join
    wait (v_exp.size() == 0 && h_exp.size() == 0);
    repeat (5) @(posedge clk);
    check(v_got == WINDOWS * D * G, "vadvc line count");
    check(h_got == WINDOWS * 2 * R, "hdiff line count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

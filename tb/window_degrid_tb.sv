// window_degrid_tb: feeds two windows of result lines in backward-sweep
// order (top level first, groups in order) and checks that they come out in
// window order (level 0 first), that no line is accepted while a window is
// being emitted, and that emission runs at one line per cycle.
module window_degrid_tb;
  localparam int W = 1024, G = 3, D = 5;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] line_of [D][G];

  window_degrid #(.W(W), .GROUPS(G), .DEPTH(D), .REVERSE(1'b1)) dut (.*);

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
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int win = 0; win < 2; win++) begin
      for (int k = 0; k < D; k++)
        for (int g = 0; g < G; g++) line_of[k][g] = {W/32{$urandom}};
      // backward order
      for (int k = D - 1; k >= 0; k--)
        for (int g = 0; g < G; g++) begin
          in_valid = 1; in_data = line_of[k][g];
          check(in_ready == 1, "not ready while collecting");
          @(negedge clk);
        end
      in_valid = 0;
      check(out_valid == 1 && in_ready == 0, "not emitting after a full window");
      out_ready = 1;
      for (int k = 0; k < D; k++)
        for (int g = 0; g < G; g++) begin
          check(out_valid && out_data == line_of[k][g], $sformatf("win %0d line k=%0d g=%0d", win, k, g));
          @(negedge clk);
        end
      out_ready = 0;
      check(out_valid == 0 && in_ready == 1, "not back to collecting");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// cacheline_buffer_tb: drives the 64-line cache-line FIFO with random valid
// and ready patterns and compares every line leaving it with a queue model.
// Also fills it completely to check that exactly 64 lines fit and that
// in_ready then drops, and checks the one-cycle write-to-read latency.
module cacheline_buffer_tb;
  localparam int W = 1024;
  localparam int DEPTH = 64;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  cacheline_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);

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

  function automatic logic [W-1:0] rand_line();
    logic [W-1:0] v;
    for (int i = 0; i < W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  // scoreboard
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(model.size() > 0 && out_data == model[0], "data out of order");
      if (model.size() > 0) void'(model.pop_front());
    end
    if (in_valid && in_ready) model.push_back(in_data);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill completely
    @(negedge clk);
    check(out_valid == 0 && count == 0, "not empty after reset");
    for (int i = 0; i < DEPTH; i++) begin
      in_valid = 1; in_data = rand_line();
      @(negedge clk);
      if (i == 0) check(out_valid == 1, "written line not visible after one cycle");
    end
    in_valid = 0;
    check(count == DEPTH && in_ready == 0, "64 lines do not fill the buffer");
    // drain completely
    out_ready = 1;
    repeat (DEPTH) @(negedge clk);
    out_ready = 0;
    check(count == 0 && out_valid == 0, "not empty after draining 64");
    // random traffic
    for (int i = 0; i < 5000; i++) begin
      in_valid = ($urandom_range(3) != 0);
      in_data = rand_line();
      out_ready = ($urandom_range(3) != 0);
      @(negedge clk);
      check(count <= DEPTH, "count above depth");
    end
    in_valid = 0; out_ready = 1;
    repeat (DEPTH + 2) @(negedge clk);
    check(model.size() == 0, "lines left behind");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

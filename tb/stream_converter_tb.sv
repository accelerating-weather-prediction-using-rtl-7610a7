// stream_converter_tb: sends random 1024-bit lines through the down path and
// random 256-bit beats through the up path, under random backpressure, and
// compares the outputs with the expected split and assembly (beat 0 = bits
// [255:0]). Also checks that an uninterrupted line takes four beats.
module stream_converter_tb;
  localparam int WW = 1024, NW = 256, R = WW / NW;

  logic clk = 0, rst_n = 0;
  logic dn_in_valid = 0, dn_in_ready, dn_out_valid, dn_out_ready = 0;
  logic [WW-1:0] dn_in_data = '0;
  logic [NW-1:0] dn_out_data;
  logic up_in_valid = 0, up_in_ready, up_out_valid, up_out_ready = 0;
  logic [NW-1:0] up_in_data = '0;
  logic [WW-1:0] up_out_data;
  int checks = 0, failures = 0;

  logic [NW-1:0] exp_beats [$];
  logic [NW-1:0] up_beats [$];
  logic [WW-1:0] exp_lines [$];
  int n_dn_lines = 0, n_up_lines = 0;
  bit dn_acc = 0, up_acc = 0;  // handshake happened at the last clock edge

  always @(posedge clk) begin
    dn_acc <= dn_in_valid && dn_in_ready;
    up_acc <= up_in_valid && up_in_ready;
  end

  stream_converter #(.WIDE_W(WW), .NARROW_W(NW)) dut (.*);

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

  function automatic logic [WW-1:0] rand_line();
    logic [WW-1:0] v;
    for (int i = 0; i < WW / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (dn_in_valid && dn_in_ready) begin
      for (int b = 0; b < R; b++) exp_beats.push_back(dn_in_data[b*NW +: NW]);
      n_dn_lines++;
    end
    if (dn_out_valid && dn_out_ready) begin
      check(exp_beats.size() > 0 || n_dn_lines == 0, "beat without a line");
    end
    if (up_in_valid && up_in_ready) begin
      up_beats.push_back(up_in_data);
      if (up_beats.size() == R) begin
        logic [WW-1:0] l;
        for (int b = 0; b < R; b++) l[b*NW +: NW] = up_beats[b];
        exp_lines.push_back(l);
        up_beats.delete();
      end
    end
    if (up_out_valid && up_out_ready) begin
      check(exp_lines.size() > 0 && up_out_data == exp_lines[0], "up line mismatch");
      if (exp_lines.size() > 0) void'(exp_lines.pop_front());
      n_up_lines++;
    end
  end

  // the down path's beats are checked in order against the lines that were
  // being offered; lines are accepted only after their last beat, so compare
  // against the offered line directly
  logic [NW-1:0] got_beats [$];
  always @(posedge clk) if (rst_n && dn_out_valid && dn_out_ready) got_beats.push_back(dn_out_data);

  initial begin
    int cycles;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one line, no backpressure: four cycles
    @(negedge clk);
    dn_in_valid = 1; dn_in_data = rand_line(); dn_out_ready = 1;
    #1;
    cycles = 1;
    while (!dn_in_ready) begin @(negedge clk); cycles++; end
    @(negedge clk);
    dn_in_valid = 0;
    check(cycles == R, $sformatf("down line took %0d cycles", cycles));
    // random traffic
    for (int i = 0; i < 8000; i++) begin
      if (!dn_in_valid || dn_acc) begin
        dn_in_valid = ($urandom_range(3) != 0);
        dn_in_data = rand_line();
      end
      dn_out_ready = ($urandom_range(3) != 0);
      if (!up_in_valid || up_acc) begin
        up_in_valid = ($urandom_range(3) != 0);
        up_in_data = {8{$urandom}};
      end
      up_out_ready = ($urandom_range(3) != 0);
      @(negedge clk);
    end
    dn_in_valid = 0; up_in_valid = 0; dn_out_ready = 1; up_out_ready = 1;
    repeat (10) @(negedge clk);
    check(got_beats.size() == exp_beats.size(), "down beat count");
    for (int i = 0; i < got_beats.size() && i < exp_beats.size(); i++)
      check(got_beats[i] == exp_beats[i], $sformatf("down beat %0d mismatch", i));
    check(exp_lines.size() == 0 && n_up_lines > 100, "up lines missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// field_splitter_tb: streams several levels of a level-major window
// (GROUPS lines per field per level) into the splitter and checks that every
// field output delivers exactly its own lines, in order, under random
// backpressure on the field outputs.
module field_splitter_tb;
  localparam int W = 1024, NF = 4, G = 4, LEVELS = 40;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [W-1:0] in_data = '0;
  logic out_valid [NF];
  logic out_ready [NF];
  logic [W-1:0] out_data [NF];
  int checks = 0, failures = 0;
  logic [W-1:0] exp_q [NF][$];
  int got [NF];
  bit drain = 0;

  always @(negedge clk)
    for (int q = 0; q < NF; q++) out_ready[q] = drain || ($urandom_range(2) != 0);

  field_splitter #(.W(W), .NUM_FIELDS(NF), .GROUPS(G), .FIFO_DEPTH(8)) dut (.*);

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

  always @(posedge clk) if (rst_n) begin
    for (int f = 0; f < NF; f++)
      if (out_valid[f] && out_ready[f]) begin
        check(exp_q[f].size() > 0 && out_data[f] == exp_q[f][0], $sformatf("field %0d mismatch", f));
        if (exp_q[f].size() > 0) void'(exp_q[f].pop_front());
        got[f]++;
      end
  end

  initial begin
    for (int f = 0; f < NF; f++) got[f] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < LEVELS; k++)
      for (int f = 0; f < NF; f++)
        for (int g = 0; g < G; g++) begin
          in_valid = 1;
          in_data = {W/32{32'(k * 1000 + f * 100 + g)}};
          in_data[31:0] = $urandom;
          exp_q[f].push_back(in_data);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
        end
    in_valid = 0;
    drain = 1;
    repeat (20) @(negedge clk);
    for (int f = 0; f < NF; f++)
      check(got[f] == LEVELS * G && exp_q[f].size() == 0, $sformatf("field %0d count %0d", f, got[f]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// hdiff_engine_tb: streams random planes through the horizontal-diffusion
// engine and compares every output point bit-exactly with a reference
// Laplacian/flux computation in float32 reference arithmetic (same operation
// order), including the unchanged halo. Checks the load and emit phases take
// ROWS cycles each and that output backpressure is honoured.
module hdiff_engine_tb;
  import tb_fp_pkg::*;
  localparam int L = 8, R = 8, PLANES = 3;
  localparam logic [31:0] C1 = 32'h3E80_0000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [L*32-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  logic [31:0] S [R][L], O [R][L];

  hdiff_engine #(.LANES(L), .ROWS(R), .C1(C1)) dut (.*);

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

  function automatic logic [31:0] lapr(input int r, input int c);
    logic [31:0] nb;
    nb = radd(radd(radd(S[r][c+1], S[r][c-1]), S[r+1][c]), S[r-1][c]);
    return rsub(rmul(32'h4080_0000, S[r][c]), nb);
  endfunction

  task automatic make_plane();
    for (int r = 0; r < R; r++)
      for (int c = 0; c < L; c++) S[r][c] = r2f(real'($urandom_range(100000)) / 1000.0 - 50.0);
    for (int r = 0; r < R; r++)
      for (int c = 0; c < L; c++) begin
        if (r >= 2 && r < R - 2 && c >= 2 && c < L - 2) begin
          logic [31:0] lc, fc, fcm, fr, frm;
          lc  = lapr(r, c);
          fc  = rsub(lapr(r, c + 1), lc);
          fcm = rsub(lc, lapr(r, c - 1));
          fr  = rsub(lapr(r + 1, c), lc);
          frm = rsub(lc, lapr(r - 1, c));
          O[r][c] = rsub(S[r][c], rmul(C1, radd(rsub(fc, fcm), rsub(fr, frm))));
        end else begin
          O[r][c] = S[r][c];
        end
      end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < PLANES; p++) begin
      make_plane();
      @(negedge clk);
      t0 = $time;
      for (int r = 0; r < R; r++) begin
        in_valid = 1;
        for (int c = 0; c < L; c++) in_data[c*32 +: 32] = S[r][c];
        #1 check(in_ready, "load stalled");
        @(negedge clk);
      end
      in_valid = 0;
      check(($time - t0) / 10 == R, "load did not take ROWS cycles");
      check(out_valid && !in_ready, "not computing after a full plane");
      for (int r = 0; r < R; r++) begin
        if (r == 3) begin out_ready = 0; repeat (2) @(negedge clk); end
        out_ready = 1;
        #1;
        for (int c = 0; c < L; c++)
          check(out_valid && out_data[c*32 +: 32] == O[r][c],
                $sformatf("plane %0d r=%0d c=%0d got %h exp %h", p, r, c, out_data[c*32 +: 32], O[r][c]));
        @(negedge clk);
      end
      out_ready = 0;
      check(!out_valid && in_ready, "not back to loading");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

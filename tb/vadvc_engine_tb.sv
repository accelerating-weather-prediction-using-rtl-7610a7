// vadvc_engine_tb: solves random diagonally dominant tridiagonal systems,
// one per column, and compares every output value bit-exactly with a
// reference Thomas solve done with the double-rounded float32 reference
// arithmetic. Also checks the output order (top level first), the cycle
// count of each sweep (DEPTH*GROUPS cycles each with no stalls), and that the
// solution satisfies the system to within float32 accuracy.
module vadvc_engine_tb;
  import tb_fp_pkg::*;
  localparam int L = 4, G = 2, D = 8, WINDOWS = 3;

  logic clk = 0, rst_n = 0;
  logic f_valid [4];
  logic f_ready [4];
  logic [L*32-1:0] f_data [4];
  logic x_valid, x_ready = 0, busy_bwd;
  logic [L*32-1:0] x_data;
  int checks = 0, failures = 0;

  logic [31:0] A [D][G*L], Bm [D][G*L], C [D][G*L], Dv [D][G*L], X [D][G*L];

  vadvc_engine #(.LANES(L), .GROUPS(G), .DEPTH(D)) dut (.*);

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

  function automatic logic [31:0] rnd(input real lo, input real hi);
    return r2f(lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0);
  endfunction

  task automatic make_and_solve();
    logic [31:0] cp [D], dp [D], m;
    for (int col = 0; col < G * L; col++) begin
      for (int k = 0; k < D; k++) begin
        A[k][col]  = (k == 0) ? 32'h0 : rnd(-1.0, 1.0);
        C[k][col]  = (k == D - 1) ? 32'h0 : rnd(-1.0, 1.0);
        Bm[k][col] = rnd(3.0, 5.0);
        Dv[k][col] = rnd(-10.0, 10.0);
      end
      // reference Thomas algorithm, same operation order as the engine
      for (int k = 0; k < D; k++) begin
        m = (k == 0) ? Bm[k][col] : rsub(Bm[k][col], rmul(A[k][col], cp[k-1]));
        cp[k] = rdiv(C[k][col], m);
        dp[k] = (k == 0) ? rdiv(Dv[k][col], m) : rdiv(rsub(Dv[k][col], rmul(A[k][col], dp[k-1])), m);
      end
      for (int k = D - 1; k >= 0; k--)
        X[k][col] = (k == D - 1) ? dp[k] : rsub(dp[k], rmul(cp[k], X[k+1][col]));
    end
  endtask

  initial begin
    int t0, t1;
    for (int i = 0; i < 4; i++) f_valid[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int win = 0; win < WINDOWS; win++) begin
      make_and_solve();
      @(negedge clk);
      t0 = $time;
      for (int k = 0; k < D; k++)
        for (int g = 0; g < G; g++) begin
          for (int l = 0; l < L; l++) begin
            f_data[0][l*32 +: 32] = A[k][g*L+l];
            f_data[1][l*32 +: 32] = Bm[k][g*L+l];
            f_data[2][l*32 +: 32] = C[k][g*L+l];
            f_data[3][l*32 +: 32] = Dv[k][g*L+l];
          end
          for (int i = 0; i < 4; i++) f_valid[i] = 1;
          #1;
          check(f_ready[0] && f_ready[3], "forward sweep stalled");
          @(negedge clk);
        end
      for (int i = 0; i < 4; i++) f_valid[i] = 0;
      t1 = $time;
      check((t1 - t0) / 10 == D * G, $sformatf("forward sweep took %0d cycles", (t1 - t0) / 10));
      check(busy_bwd && x_valid, "backward sweep not started");
      // backward sweep, with a stall in the middle
      for (int k = D - 1; k >= 0; k--)
        for (int g = 0; g < G; g++) begin
          if (k == D / 2 && g == 0) begin x_ready = 0; repeat (3) @(negedge clk); end
          x_ready = 1;
          #1;
          check(x_valid, "no output during backward sweep");
          for (int l = 0; l < L; l++)
            check(x_data[l*32 +: 32] == X[k][g*L+l],
                  $sformatf("win %0d k=%0d col=%0d got %h exp %h", win, k, g*L+l, x_data[l*32 +: 32], X[k][g*L+l]));
          @(negedge clk);
        end
      x_ready = 0;
      check(!x_valid && !busy_bwd, "still busy after the window");
    end
    // residual check on the last window: |a x- + b x + c x+ - d| small
    for (int col = 0; col < G * L; col++)
      for (int k = 0; k < D; k++) begin
        real r;
        r = f2r(Bm[k][col]) * f2r(X[k][col]) - f2r(Dv[k][col]);
        if (k > 0) r += f2r(A[k][col]) * f2r(X[k-1][col]);
        if (k < D - 1) r += f2r(C[k][col]) * f2r(X[k+1][col]);
        check(r < 1e-4 && r > -1e-4, $sformatf("residual %f", r));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

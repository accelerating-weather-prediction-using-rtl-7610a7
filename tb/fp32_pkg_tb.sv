// fp32_pkg_tb: checks the float32 add, subtract, multiply and divide
// functions bit-exactly against the double-precision reference on random
// operands of similar and of very different magnitudes, and on a few fixed
// cases (cancellation, exact zero, ties).
module fp32_pkg_tb;
  import fp32_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0;
  int failures = 0;

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp,
                       input logic [31:0] a, input logic [31:0] b);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s %h %h: got %h expected %h", what, a, b, got, exp);
    end
  endtask

  // Watchdog: the checks take no simulated time, so any delay means a hang.
  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] a, b;
    for (int i = 0; i < 20000; i++) begin
      if (i % 2 == 0) begin
        a = rand_f32(100, 150);
        b = rand_f32(100, 150);
      end else begin
        a = rand_f32(120, 130);
        b = {1'($urandom), a[30:23], 23'($urandom)};
      end
      check("add", f32_add(a, b), radd(a, b), a, b);
      check("sub", f32_sub(a, b), rsub(a, b), a, b);
      check("mul", f32_mul(a, b), rmul(a, b), a, b);
      check("div", f32_div(a, b), rdiv(a, b), a, b);
    end
    check("x-x", f32_sub(32'h3FC0_0000, 32'h3FC0_0000), 32'h0, 32'h3FC0_0000, 32'h3FC0_0000);
    check("1+2^-24", f32_add(F32_ONE, 32'h3380_0000), F32_ONE, F32_ONE, 32'h3380_0000);
    check("1+3*2^-25", f32_add(F32_ONE, 32'h33C0_0000), 32'h3F80_0001, F32_ONE, 32'h33C0_0000);
    check("1/3", f32_div(F32_ONE, 32'h4040_0000), 32'h3EAA_AAAB, F32_ONE, 32'h4040_0000);
    check("4*1.5", f32_mul(F32_FOUR, 32'h3FC0_0000), 32'h40C0_0000, F32_FOUR, 32'h3FC0_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
